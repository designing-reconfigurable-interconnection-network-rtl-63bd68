// kf_class_arb -- class-aware round-robin arbiter used by the switch allocator.
//
// With weight 0 it is a plain round-robin arbiter over N requesters. With weight
// W > 0 it grants up to W GPU requesters in a row and then prefers one CPU
// requester, which yields the "two GPU packets, then one CPU packet" output order
// of the paper when W = 2. The preference falls back to the other class when the
// preferred class has no request, so neither class can starve and no slot is
// wasted. Within a class the choice rotates from the last winner. The grant is
// combinational; the pointer and the GPU run counter move only when `advance` is
// high (the grant was actually used).
module kf_class_arb
  import kf_noc_pkg::*;
#(
  parameter int unsigned N = 5
)(
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic [N-1:0] is_gpu,
  input  logic [1:0]   weight,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic         any_gnt
);
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1;

  logic [IDX_W-1:0] ptr;      // highest priority index
  logic [1:0]       gpu_run;  // GPU grants since the last CPU grant
  logic [N-1:0]     pref, cand;
  logic [IDX_W-1:0] win;

  always_comb begin
    if (weight == 2'd0)          pref = req;
    else if (gpu_run < weight)   pref = req & is_gpu;
    else                         pref = req & ~is_gpu;
    cand = (pref != '0) ? pref : req;

    gnt     = '0;
    win     = '0;
    any_gnt = 1'b0;
    for (int i = 0; i < int'(N); i++) begin
      int unsigned idx;
      idx = (32'(ptr) + 32'(i)) % N;
      if (!any_gnt && cand[idx]) begin
        any_gnt  = 1'b1;
        win      = IDX_W'(idx);
        gnt[idx] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr     <= '0;
      gpu_run <= '0;
    end else if (advance && any_gnt) begin
      ptr <= (32'(win) == N - 1) ? '0 : win + 1'b1;
      if (is_gpu[win]) gpu_run <= (gpu_run == 2'd3) ? 2'd3 : gpu_run + 2'd1;
      else             gpu_run <= 2'd0;
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
