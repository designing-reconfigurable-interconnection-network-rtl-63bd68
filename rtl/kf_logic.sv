// kf_logic -- the per-router "KF logic" that turns the 0/1 Kalman-filter decision
// into allocator settings.
//
// Following the paper's VC partition, with KF output 0 the GPU class owns the
// lower half of the virtual channels and the CPU class the upper half (VC0-1 vs
// VC2-3 for four VCs); with KF output 1 the GPU class owns three quarters (VC0-2)
// and the CPU class the rest (VC3). The switch allocator runs plain round-robin
// for output 0 and grants GPU_WEIGHT GPU flits per CPU flit for output 1.
//
// The mode is registered once on entry so that every router switches on a clock
// edge, independent of wire length from the filter; this one-cycle delay is this
// design's choice. Reset state is mode 0 (equal sharing), as in the paper.
module kf_logic
  import kf_noc_pkg::*;
#(
  parameter int unsigned NUM_VC     = 4,
  parameter int unsigned GPU_WEIGHT = 2
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              kf_mode_in,   // 0: equal sharing, 1: favour GPU
  output logic              mode,         // registered mode
  output logic [NUM_VC-1:0] gpu_vc_mask,
  output logic [NUM_VC-1:0] cpu_vc_mask,
  output logic [1:0]        sw_gpu_weight // 0: round-robin, else GPU grants per CPU grant
);
  localparam int unsigned GPU_VCS_EQ    = NUM_VC / 2;
  localparam int unsigned GPU_VCS_BOOST = (NUM_VC * 3) / 4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mode <= 1'b0;
    else        mode <= kf_mode_in;
  end

  always_comb begin
    gpu_vc_mask = '0;
    for (int v = 0; v < NUM_VC; v++)
      gpu_vc_mask[v] = (v < int'(mode ? GPU_VCS_BOOST : GPU_VCS_EQ));
    cpu_vc_mask   = ~gpu_vc_mask;
    sw_gpu_weight = mode ? 2'(GPU_WEIGHT) : 2'd0;
  end
endmodule
