// kf_vc_allocator -- reconfigurable virtual-channel allocator of one router.
//
// A head flit at the front of an input VC requests an output VC on the output port
// chosen by routing. Which output VCs it may take depends on its traffic class and
// on the KF decision: the class masks come from kf_logic (GPU VC0-1 / CPU VC2-3
// for KF output 0, GPU VC0-2 / CPU VC3 for KF output 1, as in the paper's figure
// of the reconfigurable VC allocation). An output VC stays owned by one packet
// from its head until its tail has been sent (release), so a mode change never
// takes a VC away from a packet in flight; only new allocations follow new masks.
//
// Per output port one request is granted per cycle, chosen round-robin among the
// input VCs (P*V of them) that target it and whose class still has a free allowed
// VC; the winner receives the lowest-numbered free allowed VC. The round-robin
// matches the paper's round-robin baseline; the one-grant-per-output-per-cycle
// structure and the lowest-index VC choice are this design's choices. The grant
// is combinational and takes effect at the next clock edge.
module kf_vc_allocator
  import kf_noc_pkg::*;
#(
  parameter int unsigned NUM_IN  = 5,
  parameter int unsigned NUM_OUT = 5,
  parameter int unsigned NUM_VC  = 4
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req      [NUM_IN*NUM_VC],
  input  logic [2:0]        req_port [NUM_IN*NUM_VC],
  input  logic              req_gpu  [NUM_IN*NUM_VC],
  input  logic [NUM_VC-1:0] gpu_vc_mask,
  input  logic [NUM_VC-1:0] cpu_vc_mask,
  input  logic [NUM_VC-1:0] release_vc [NUM_OUT],  // tail sent on (output, vc)
  output logic              gnt      [NUM_IN*NUM_VC],
  output logic [VC_ID_W-1:0] gnt_vc  [NUM_IN*NUM_VC],
  output logic [NUM_VC-1:0] busy     [NUM_OUT]      // output VC ownership, for observation
);
  localparam int unsigned NR    = NUM_IN * NUM_VC;
  localparam int unsigned VCI_W = (NUM_VC > 1) ? $clog2(NUM_VC) : 1;

  logic [NUM_VC-1:0]  free_gpu [NUM_OUT];
  logic [NUM_VC-1:0]  free_cpu [NUM_OUT];
  logic [VC_ID_W-1:0] pick_gpu [NUM_OUT];
  logic [VC_ID_W-1:0] pick_cpu [NUM_OUT];
  logic [NR-1:0]      o_req    [NUM_OUT];
  logic [NR-1:0]      o_gnt    [NUM_OUT];
  logic [NR-1:0]      all_gpu;
  logic               o_any    [NUM_OUT];

  always_comb
    for (int i = 0; i < int'(NR); i++) all_gpu[i] = req_gpu[i];

  for (genvar o = 0; o < NUM_OUT; o++) begin : g_out
    always_comb begin
      free_gpu[o] = ~busy[o] & gpu_vc_mask;
      free_cpu[o] = ~busy[o] & cpu_vc_mask;
      pick_gpu[o] = '0;
      pick_cpu[o] = '0;
      for (int w = NUM_VC - 1; w >= 0; w--) begin
        if (free_gpu[o][w]) pick_gpu[o] = VC_ID_W'(w);
        if (free_cpu[o][w]) pick_cpu[o] = VC_ID_W'(w);
      end
      for (int i = 0; i < int'(NR); i++)
        o_req[o][i] = req[i] && (32'(req_port[i]) == o) &&
                      (req_gpu[i] ? (free_gpu[o] != '0) : (free_cpu[o] != '0));
    end

    kf_class_arb #(.N(NR)) u_arb (
      .clk, .rst_n,
      .req     (o_req[o]),
      .is_gpu  (all_gpu),
      .weight  (2'd0),
      .advance (1'b1),
      .gnt     (o_gnt[o]),
      .any_gnt (o_any[o])
    );

    logic [NUM_VC-1:0] busy_nxt;
    always_comb begin
      busy_nxt = busy[o] & ~release_vc[o];
      for (int i = 0; i < int'(NR); i++)
        if (o_gnt[o][i]) busy_nxt[VCI_W'(req_gpu[i] ? pick_gpu[o] : pick_cpu[o])] = 1'b1;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) busy[o] <= '0;
      else        busy[o] <= busy_nxt;
    end

    a_release_owned: assert property (@(posedge clk) disable iff (!rst_n)
                       (release_vc[o] & ~busy[o]) == '0);
  end

  always_comb begin
    for (int i = 0; i < int'(NR); i++) begin
      gnt[i]    = 1'b0;
      gnt_vc[i] = '0;
      for (int o = 0; o < int'(NUM_OUT); o++) begin
        if (o_gnt[o][i]) begin
          gnt[i]    = 1'b1;
          gnt_vc[i] = req_gpu[i] ? pick_gpu[o] : pick_cpu[o];
        end
      end
    end
  end
endmodule
