// kf_crossbar -- the router's switch: a registered NUM_PORT x NUM_PORT crossbar.
//
// For each output port, the switch allocator names (one-hot) the input port whose
// flit crosses this cycle; each input port presents the flit of the VC it was
// granted together with the output VC that VC owns. The crossbar rewrites the
// flit's vc field to that output VC and registers the result onto the output
// channel, so a flit leaves the router one clock edge after switch allocation.
// The output register is this design's choice; the paper only names the block.
module kf_crossbar
  import kf_noc_pkg::*;
#(
  parameter int unsigned NUM_PORT = 5
)(
  input  logic                clk,
  input  logic                rst_n,
  input  flit_t               in_flit   [NUM_PORT],
  input  logic [VC_ID_W-1:0]  in_out_vc [NUM_PORT],
  input  logic [NUM_PORT-1:0] sel       [NUM_PORT],  // per output: one-hot input
  input  logic                sel_valid [NUM_PORT],
  output link_t               out_link  [NUM_PORT]
);
  for (genvar o = 0; o < NUM_PORT; o++) begin : g_out
    flit_t f, flit_q;
    logic  valid_q;
    always_comb begin
      f = '0;
      for (int p = 0; p < int'(NUM_PORT); p++)
        if (sel[o][p]) begin
          f    = in_flit[p];
          f.vc = in_out_vc[p];
        end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) valid_q <= 1'b0;
      else        valid_q <= sel_valid[o];
    end
    always_ff @(posedge clk) begin
      if (sel_valid[o]) flit_q <= f;
    end
    assign out_link[o] = '{valid: valid_q, flit: flit_q};
  end
endmodule
