// kf_ni -- network interface between a tile (CPU, GPU or memory node) and the
// Local port of its router.
//
// Injection: the tile offers one flit per cycle (inj_valid/inj_ready handshake,
// flit transferred when both are high). For a head flit the interface chooses,
// among the VCs of the router's Local input that the flit's class may use in the
// current KF mode (same masks as the routers, via its own kf_logic), the one with
// the most free buffer slots (lowest index on a tie); the remaining flits of the packet follow on that VC. The
// interface keeps one credit counter per VC, so it never overruns the router's
// buffers, and registers the flit onto the link. A GPU-class head flit accepted
// here is one GPU_Icnt_Push event (push_gpu pulse).
//
// Ejection: flits leaving the router's Local output are delivered to the tile on
// ej_valid/ej_flit in the same cycle and the buffer slot is credited back at the
// next edge; the tile is assumed always able to accept. The paper only says that
// each chiplet attaches to its router; everything in this block is this design's
// choice, kept as simple as the credit protocol and the VC partition allow.
module kf_ni
  import kf_noc_pkg::*;
#(
  parameter int unsigned NUM_VC    = 4,
  parameter int unsigned BUF_DEPTH = 4
)(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    kf_mode,
  // tile side
  input  logic    inj_valid,
  input  flit_t   inj_flit,
  output logic    inj_ready,
  output logic    ej_valid,
  output flit_t   ej_flit,
  output logic    push_gpu,
  // router side
  output link_t   to_router,
  input  credit_t credit_from_router,
  input  link_t   from_router,
  output credit_t credit_to_router
);
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);

  logic               mode_q;
  logic [NUM_VC-1:0]  gpu_vc_mask, cpu_vc_mask, allowed, cand;
  logic [1:0]         unused_weight;
  logic [CW-1:0]      credits [NUM_VC];
  logic               in_pkt;
  logic [VC_ID_W-1:0] cur_vc, head_vc, send_vc;
  logic               fire;
  logic [CW-1:0]      best;

  kf_logic #(.NUM_VC(NUM_VC)) u_kf_logic (
    .clk, .rst_n, .kf_mode_in(kf_mode), .mode(mode_q),
    .gpu_vc_mask, .cpu_vc_mask, .sw_gpu_weight(unused_weight)
  );

  always_comb begin
    allowed = (inj_flit.cls == CLS_GPU) ? gpu_vc_mask : cpu_vc_mask;
    for (int v = 0; v < int'(NUM_VC); v++) cand[v] = allowed[v] && (credits[v] != '0);
    head_vc = '0;
    best    = '0;
    for (int v = 0; v < int'(NUM_VC); v++)
      if (cand[v] && credits[v] > best) begin
        head_vc = VC_ID_W'(v);
        best    = credits[v];
      end
    send_vc   = in_pkt ? cur_vc : head_vc;
    inj_ready = in_pkt ? (credits[send_vc[$clog2(NUM_VC)-1:0]] != '0) : (cand != '0);
    fire      = inj_valid && inj_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt           <= 1'b0;
      cur_vc           <= '0;
      to_router        <= '0;
      credit_to_router <= '0;
      push_gpu         <= 1'b0;
      for (int v = 0; v < int'(NUM_VC); v++) credits[v] <= CW'(BUF_DEPTH);
    end else begin
      to_router.valid <= fire;
      if (fire) begin
        to_router.flit    <= inj_flit;
        to_router.flit.vc <= send_vc;
        if (inj_flit.tail)      in_pkt <= 1'b0;
        else if (!in_pkt)       begin in_pkt <= 1'b1; cur_vc <= head_vc; end
      end
      push_gpu <= fire && inj_flit.head && (inj_flit.cls == CLS_GPU);
      for (int v = 0; v < int'(NUM_VC); v++)
        credits[v] <= credits[v]
                      - CW'(fire && (32'(send_vc) == v))
                      + CW'(credit_from_router.valid && (32'(credit_from_router.vc) == v));
      credit_to_router.valid <= from_router.valid;
      credit_to_router.vc    <= from_router.flit.vc;
    end
  end

  assign ej_valid = from_router.valid;
  assign ej_flit  = from_router.flit;

  a_head_first: assert property (@(posedge clk) disable iff (!rst_n)
                  (inj_valid && inj_ready && !in_pkt) |-> inj_flit.head);
endmodule
