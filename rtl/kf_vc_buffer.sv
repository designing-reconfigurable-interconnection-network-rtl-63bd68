// kf_vc_buffer -- the virtual-channel input buffers of one router input port.
//
// Each input port holds NUM_VC independent FIFOs of BUF_DEPTH flits (4 VCs and 4
// buffers per VC in the evaluated network). An arriving flit is written into the
// FIFO named by its vc field in the cycle it is presented; the front flit of every
// FIFO is visible combinationally to the allocators, and a one-hot pop removes it
// at the clock edge. Flow control is credit based, so an arrival into a full FIFO
// is a protocol error (asserted). Read-during-write of the same FIFO is allowed.
// The FIFO organisation (circular buffer with pointers) is this design's choice.
module kf_vc_buffer
  import kf_noc_pkg::*;
#(
  parameter int unsigned NUM_VC    = 4,
  parameter int unsigned BUF_DEPTH = 4
)(
  input  logic              clk,
  input  logic              rst_n,
  input  link_t             in_link,
  input  logic [NUM_VC-1:0] pop,
  output flit_t             front    [NUM_VC],
  output logic [NUM_VC-1:0] nonempty
);
  localparam int unsigned PTR_W = (BUF_DEPTH > 1) ? $clog2(BUF_DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(BUF_DEPTH + 1);

  flit_t            mem   [NUM_VC][BUF_DEPTH];
  logic [PTR_W-1:0] rd_ptr[NUM_VC];
  logic [PTR_W-1:0] wr_ptr[NUM_VC];
  logic [CNT_W-1:0] count [NUM_VC];

  function automatic logic [PTR_W-1:0] ptr_inc(input logic [PTR_W-1:0] p);
    return (32'(p) == BUF_DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    logic wr;
    assign wr          = in_link.valid && (32'(in_link.flit.vc) == v);
    assign front[v]    = mem[v][rd_ptr[v]];
    assign nonempty[v] = (count[v] != '0);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_ptr[v] <= '0;
        wr_ptr[v] <= '0;
        count[v]  <= '0;
      end else begin
        if (wr)     wr_ptr[v] <= ptr_inc(wr_ptr[v]);
        if (pop[v]) rd_ptr[v] <= ptr_inc(rd_ptr[v]);
        count[v] <= count[v] + CNT_W'(wr) - CNT_W'(pop[v]);
      end
    end

    always_ff @(posedge clk) begin
      if (wr) mem[v][wr_ptr[v]] <= in_link.flit;
    end

    // Credit-based flow control never overruns or underruns a VC FIFO.
    a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                      wr |-> (32'(count[v]) < BUF_DEPTH) || pop[v]);
    a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                      pop[v] |-> nonempty[v]);
  end
endmodule
