// kf_mesh -- one subnet: a MESH_X x MESH_Y 2D mesh of kf_router (6 x 6 by default).
//
// Router (x, y) has node index n = y*MESH_X + x. Its East port connects to the
// West port of (x+1, y) and its South port to the North port of (x, y+1), each
// link carrying flits forward and credits backward. Ports on the mesh boundary are
// tied off (no flits, no credits); XY routing never sends a flit to them as long
// as destinations lie inside the mesh (asserted). The Local port of every router
// is brought out for that node's network interface. All routers receive the same
// KF mode; each registers it in its own KF logic.
module kf_mesh
  import kf_noc_pkg::*;
#(
  parameter int unsigned MESH_X    = 6,
  parameter int unsigned MESH_Y    = 6,
  parameter int unsigned NUM_VC    = 4,
  parameter int unsigned BUF_DEPTH = 4
)(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    kf_mode,
  input  link_t   local_in         [MESH_X*MESH_Y],
  output credit_t local_credit_out [MESH_X*MESH_Y],
  output link_t   local_out        [MESH_X*MESH_Y],
  input  credit_t local_credit_in  [MESH_X*MESH_Y],
  output logic    router_mode      [MESH_X*MESH_Y],
  output logic [NUM_PORTS-1:0] sa_gpu_grant [MESH_X*MESH_Y],
  output logic [NUM_PORTS-1:0] sa_cpu_grant [MESH_X*MESH_Y]
);
  localparam int unsigned N = MESH_X * MESH_Y;

  link_t   in_l  [N][NUM_PORTS];
  link_t   out_l [N][NUM_PORTS];
  credit_t cr_in [N][NUM_PORTS];
  credit_t cr_out[N][NUM_PORTS];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned n = y * MESH_X + x;

      // West input / East output credit
      if (x > 0) begin : g_w
        assign in_l [n][PORT_W] = out_l [n-1][PORT_E];
        assign cr_in[n][PORT_W] = cr_out[n-1][PORT_E];
      end else begin : g_w0
        assign in_l [n][PORT_W] = '0;
        assign cr_in[n][PORT_W] = '0;
      end
      if (x < MESH_X - 1) begin : g_e
        assign in_l [n][PORT_E] = out_l [n+1][PORT_W];
        assign cr_in[n][PORT_E] = cr_out[n+1][PORT_W];
      end else begin : g_e0
        assign in_l [n][PORT_E] = '0;
        assign cr_in[n][PORT_E] = '0;
      end
      if (y > 0) begin : g_n
        assign in_l [n][PORT_N] = out_l [n-MESH_X][PORT_S];
        assign cr_in[n][PORT_N] = cr_out[n-MESH_X][PORT_S];
      end else begin : g_n0
        assign in_l [n][PORT_N] = '0;
        assign cr_in[n][PORT_N] = '0;
      end
      if (y < MESH_Y - 1) begin : g_s
        assign in_l [n][PORT_S] = out_l [n+MESH_X][PORT_N];
        assign cr_in[n][PORT_S] = cr_out[n+MESH_X][PORT_N];
      end else begin : g_s0
        assign in_l [n][PORT_S] = '0;
        assign cr_in[n][PORT_S] = '0;
      end
      assign in_l [n][PORT_L]  = local_in[n];
      assign cr_in[n][PORT_L]  = local_credit_in[n];
      assign local_out[n]        = out_l [n][PORT_L];
      assign local_credit_out[n] = cr_out[n][PORT_L];

      kf_router #(.NUM_VC(NUM_VC), .BUF_DEPTH(BUF_DEPTH)) u_router (
        .clk, .rst_n,
        .my_x         (COORD_W'(x)),
        .my_y         (COORD_W'(y)),
        .kf_mode,
        .in_link      (in_l[n]),
        .credit_out   (cr_out[n]),
        .out_link     (out_l[n]),
        .credit_in    (cr_in[n]),
        .mode_q       (router_mode[n]),
        .sa_gpu_grant (sa_gpu_grant[n]),
        .sa_cpu_grant (sa_cpu_grant[n])
      );

      // nothing may leave through an unconnected boundary port
      if (x == 0) begin : g_aw
        a_w: assert property (@(posedge clk) disable iff (!rst_n) !out_l[n][PORT_W].valid);
      end
      if (x == MESH_X - 1) begin : g_ae
        a_e: assert property (@(posedge clk) disable iff (!rst_n) !out_l[n][PORT_E].valid);
      end
      if (y == 0) begin : g_an
        a_n: assert property (@(posedge clk) disable iff (!rst_n) !out_l[n][PORT_N].valid);
      end
      if (y == MESH_Y - 1) begin : g_as
        a_s: assert property (@(posedge clk) disable iff (!rst_n) !out_l[n][PORT_S].valid);
      end
    end
  end
endmodule
