// kf_noc_top -- heterogeneous CPU/GPU chiplet interconnect with Kalman-filter
// driven resource allocation.
//
// Two identical MESH_X x MESH_Y mesh subnets (request and reply, which keeps
// protocol deadlock away) connect the tiles; every node has one network interface
// per subnet. A monitor counts, per 1000-cycle epoch, GPU packet injections (taken
// from the network interfaces), GPU shader stalls on the network and GPU
// DRAM-full stalls (both brought in as per-node event bits from the GPU and
// memory-controller tiles), and normalises them. The Kalman filter turns these into
// a 0/1 prediction; the mode controller applies the deployment rules (start delay,
// minimum hold, maximum boost) and broadcasts the resulting mode to every router
// and network interface of both subnets. Mode 0 shares VCs and switch bandwidth
// equally between CPU and GPU traffic; mode 1 gives GPU traffic 3 of 4 VCs and two
// switch grants for every CPU grant.
//
// The tiles themselves (CPU cores, GPU SMs, caches, memory controllers) are outside
// this module: their injection and ejection channels and their stall event bits
// are ports. Per subnet s and node n: inj_valid/inj_flit/inj_ready is a
// valid/ready flit channel into the network, ej_valid/ej_flit delivers flits out of
// it (always accepted).
module kf_noc_top
  import kf_noc_pkg::*;
#(
  parameter int unsigned MESH_X       = 6,
  parameter int unsigned MESH_Y       = 6,
  parameter int unsigned NUM_SUBNETS  = 2,
  parameter int unsigned NUM_VC       = 4,
  parameter int unsigned BUF_DEPTH    = 4,
  parameter int unsigned EPOCH_CYCLES = 1000,
  parameter int unsigned START_DELAY  = 10000,
  parameter int unsigned MIN_HOLD     = 5000,
  parameter int unsigned MAX_BOOST    = 10000,
  parameter int unsigned PUSH_LOG2    = 12,      // full-scale counts of the monitor
  parameter int unsigned SHADER_LOG2  = 13,
  parameter int unsigned DRAM_LOG2    = 12
)(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      gpu_active,
  input  logic                      inj_valid [NUM_SUBNETS][MESH_X*MESH_Y],
  input  flit_t                     inj_flit  [NUM_SUBNETS][MESH_X*MESH_Y],
  output logic                      inj_ready [NUM_SUBNETS][MESH_X*MESH_Y],
  output logic                      ej_valid  [NUM_SUBNETS][MESH_X*MESH_Y],
  output flit_t                     ej_flit   [NUM_SUBNETS][MESH_X*MESH_Y],
  input  logic [MESH_X*MESH_Y-1:0]  gpu_stall_shader_ev,
  input  logic [MESH_X*MESH_Y-1:0]  gpu_stall_dramfull_ev,
  output logic                      kf_mode,
  output logic                      kf_enabled,
  output logic                      kf_forced_return,
  output logic                      kf_pred_valid,
  output logic                      kf_pred,
  output fx_t                       kf_x,
  output logic [31:0]               epoch_count [3],
  output logic [NUM_PORTS-1:0]      sa_gpu_grant [NUM_SUBNETS][MESH_X*MESH_Y],
  output logic [NUM_PORTS-1:0]      sa_cpu_grant [NUM_SUBNETS][MESH_X*MESH_Y]
);
  localparam int unsigned N = MESH_X * MESH_Y;

  link_t   ni2r [NUM_SUBNETS][N];
  link_t   r2ni [NUM_SUBNETS][N];
  credit_t cr_r2ni [NUM_SUBNETS][N];
  credit_t cr_ni2r [NUM_SUBNETS][N];
  logic    router_mode [NUM_SUBNETS][N];
  logic [NUM_SUBNETS*N-1:0] push_ev;

  for (genvar s = 0; s < NUM_SUBNETS; s++) begin : g_sub
    kf_mesh #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .NUM_VC(NUM_VC), .BUF_DEPTH(BUF_DEPTH)) u_mesh (
      .clk, .rst_n, .kf_mode,
      .local_in         (ni2r[s]),
      .local_credit_out (cr_r2ni[s]),
      .local_out        (r2ni[s]),
      .local_credit_in  (cr_ni2r[s]),
      .router_mode      (router_mode[s]),
      .sa_gpu_grant     (sa_gpu_grant[s]),
      .sa_cpu_grant     (sa_cpu_grant[s])
    );
    for (genvar n = 0; n < N; n++) begin : g_ni
      kf_ni #(.NUM_VC(NUM_VC), .BUF_DEPTH(BUF_DEPTH)) u_ni (
        .clk, .rst_n, .kf_mode,
        .inj_valid          (inj_valid[s][n]),
        .inj_flit           (inj_flit[s][n]),
        .inj_ready          (inj_ready[s][n]),
        .ej_valid           (ej_valid[s][n]),
        .ej_flit            (ej_flit[s][n]),
        .push_gpu           (push_ev[s*N+n]),
        .to_router          (ni2r[s][n]),
        .credit_from_router (cr_r2ni[s][n]),
        .from_router        (r2ni[s][n]),
        .credit_to_router   (cr_ni2r[s][n])
      );
    end
  end

  fx_t  z [3];
  logic z_valid;
  fx_t  p_est;
  fx_t  gain [3];
  logic kf_busy;

  kf_monitor #(.N_NODES(N), .N_PUSH(NUM_SUBNETS*N), .EPOCH_CYCLES(EPOCH_CYCLES),
               .PUSH_LOG2(PUSH_LOG2), .SHADER_LOG2(SHADER_LOG2), .DRAM_LOG2(DRAM_LOG2)) u_monitor (
    .clk, .rst_n,
    .push_ev, .shader_ev(gpu_stall_shader_ev), .dram_ev(gpu_stall_dramfull_ev),
    .z_valid, .z, .count(epoch_count)
  );

  kalman_filter u_kf (
    .clk, .rst_n, .z_valid, .z, .u(kf_mode),
    .busy(kf_busy), .pred_valid(kf_pred_valid), .pred(kf_pred),
    .x_est(kf_x), .p_est, .gain
  );

  kf_mode_ctrl #(.START_DELAY(START_DELAY), .MIN_HOLD(MIN_HOLD), .MAX_BOOST(MAX_BOOST)) u_ctrl (
    .clk, .rst_n, .gpu_active,
    .pred_valid(kf_pred_valid), .pred(kf_pred),
    .mode(kf_mode), .enabled(kf_enabled), .forced_return(kf_forced_return)
  );

  // every router follows the broadcast mode one cycle later
  logic kf_mode_d;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) kf_mode_d <= 1'b0;
    else        kf_mode_d <= kf_mode;

  for (genvar s = 0; s < NUM_SUBNETS; s++) begin : g_chk
    for (genvar n = 0; n < N; n++) begin : g_n
      a_mode_follows: assert property (@(posedge clk) disable iff (!rst_n)
                        router_mode[s][n] == kf_mode_d);
    end
  end
endmodule
