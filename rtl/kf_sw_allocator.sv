// kf_sw_allocator -- reconfigurable switch allocator of one router.
//
// Separable input-first allocation. Stage 1: each input port picks one of its VCs
// that is ready to move a flit (flit present, output VC owned, downstream credit).
// Stage 2: each output port picks one of the inputs whose stage-1 choice targets
// it. Both stages use kf_class_arb, so with KF output 0 both are round-robin (the
// paper's baseline and KF=0 policy) and with KF output 1 both grant two GPU flits
// for every CPU flit when both classes compete (the paper's KF=1 policy). A stage-1
// arbiter only advances when its input also won stage 2, so a losing choice keeps
// its priority. Splitting the policy across two stages is this design's choice;
// the paper describes only the order seen at one output.
//
// Combinational: grants are valid in the same cycle as the requests; the flit
// moves through the crossbar and the state updates at the next clock edge.
module kf_sw_allocator
  import kf_noc_pkg::*;
#(
  parameter int unsigned NUM_PORT = 5,
  parameter int unsigned NUM_VC   = 4
)(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [1:0]          weight,                      // 0: round-robin, 2: two GPU per CPU
  input  logic [NUM_VC-1:0]   ready    [NUM_PORT],
  input  logic [NUM_VC-1:0]   vc_gpu   [NUM_PORT],
  input  logic [2:0]          vc_port  [NUM_PORT][NUM_VC], // output port of each input VC
  output logic [NUM_VC-1:0]   in_gnt   [NUM_PORT],         // one-hot VC popped at each input
  output logic [NUM_PORT-1:0] xbar_sel [NUM_PORT],         // per output: one-hot input
  output logic                out_valid[NUM_PORT]
);
  logic [NUM_VC-1:0]   s1_gnt  [NUM_PORT];
  logic                s1_any  [NUM_PORT];
  logic [2:0]          s1_port [NUM_PORT];
  logic                s1_gpu  [NUM_PORT];
  logic [NUM_PORT-1:0] s2_req  [NUM_PORT];
  logic [NUM_PORT-1:0] s2_gpu;
  logic [NUM_PORT-1:0] in_won;

  for (genvar p = 0; p < NUM_PORT; p++) begin : g_in
    kf_class_arb #(.N(NUM_VC)) u_in_arb (
      .clk, .rst_n,
      .req     (ready[p]),
      .is_gpu  (vc_gpu[p]),
      .weight  (weight),
      .advance (in_won[p]),
      .gnt     (s1_gnt[p]),
      .any_gnt (s1_any[p])
    );
    always_comb begin
      s1_port[p] = '0;
      s1_gpu[p]  = 1'b0;
      for (int v = 0; v < int'(NUM_VC); v++)
        if (s1_gnt[p][v]) begin
          s1_port[p] = vc_port[p][v];
          s1_gpu[p]  = vc_gpu[p][v];
        end
      s2_gpu[p] = s1_gpu[p];
    end
  end

  for (genvar o = 0; o < NUM_PORT; o++) begin : g_out
    always_comb
      for (int p = 0; p < int'(NUM_PORT); p++)
        s2_req[o][p] = s1_any[p] && (32'(s1_port[p]) == o);

    kf_class_arb #(.N(NUM_PORT)) u_out_arb (
      .clk, .rst_n,
      .req     (s2_req[o]),
      .is_gpu  (s2_gpu),
      .weight  (weight),
      .advance (1'b1),
      .gnt     (xbar_sel[o]),
      .any_gnt (out_valid[o])
    );
  end

  always_comb begin
    for (int p = 0; p < int'(NUM_PORT); p++) begin
      in_won[p] = 1'b0;
      for (int o = 0; o < int'(NUM_PORT); o++)
        if (xbar_sel[o][p]) in_won[p] = 1'b1;
      in_gnt[p] = in_won[p] ? s1_gnt[p] : '0;
    end
  end
endmodule
