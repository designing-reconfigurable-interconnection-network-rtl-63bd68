// kf_noc_pkg -- shared types and constants of the KF-reconfigurable chiplet NoC.
//
// A flit carries a 32-byte payload (the 32 B channel width of the evaluated mesh)
// plus a small sideband header: head/tail markers, the traffic class (CPU or GPU),
// the virtual channel it travels on and its destination coordinates. The header
// layout, the coordinate width and the credit format are this design's choices;
// the paper gives only the channel width, the port set (N, E, S, W, Local) and
// the two traffic classes.
//
// Kalman-filter arithmetic is signed fixed point, KF_W bits with KF_FRAC
// fractional bits (Q15.16 by default), also this design's choice.
package kf_noc_pkg;

  localparam int unsigned FLIT_DATA_W = 256;  // 32 B channel width
  localparam int unsigned COORD_W     = 3;    // up to 8x8 mesh
  localparam int unsigned VC_ID_W     = 4;    // room for up to 16 VCs
  localparam int unsigned NUM_PORTS   = 5;

  typedef enum logic [2:0] {
    PORT_N = 3'd0,
    PORT_E = 3'd1,
    PORT_S = 3'd2,
    PORT_W = 3'd3,
    PORT_L = 3'd4
  } port_e;

  typedef enum logic {
    CLS_CPU = 1'b0,
    CLS_GPU = 1'b1
  } traffic_cls_e;

  typedef struct packed {
    logic                   head;
    logic                   tail;
    traffic_cls_e           cls;
    logic [VC_ID_W-1:0]     vc;
    logic [COORD_W-1:0]     dst_x;
    logic [COORD_W-1:0]     dst_y;
    logic [FLIT_DATA_W-1:0] data;
  } flit_t;

  // Forward channel: one flit per cycle when valid.
  typedef struct packed {
    logic  valid;
    flit_t flit;
  } link_t;

  // Backward channel: one credit per cycle for the named VC.
  typedef struct packed {
    logic               valid;
    logic [VC_ID_W-1:0] vc;
  } credit_t;

  // Fixed-point format of the Kalman filter.
  localparam int unsigned KF_W    = 32;
  localparam int unsigned KF_FRAC = 16;
  typedef logic signed [KF_W-1:0] fx_t;
  localparam fx_t FX_ONE = fx_t'(1) <<< KF_FRAC;

endpackage
