// kf_monitor -- per-epoch collection and normalisation of the Kalman-filter inputs.
//
// The filter observes three metrics per epoch (1000 cycles, the epoch length of
// the paper's traffic plots): GPU_Icnt_Push (GPU injections into the network),
// GPU_Stall_Icnt-Shader (GPU stalls waiting on the network) and
// GPU_Stall_Dramfull (GPU stalls on full DRAM queues). Each source delivers a
// per-node event bit every cycle; the monitor adds the popcount of each vector
// into an epoch accumulator. On the last cycle of an epoch it latches the three
// totals (including that cycle's events), clears the accumulators, maps each total
// onto [-1, 1] and pulses z_valid for one cycle.
//
// The paper normalises the metrics into [-1, 1] but does not say how. Here
// z = 2*min(count, 2^L)/2^L - 1 in kf_noc_pkg fixed point, with one full-scale
// exponent L per metric; the defaults 4096, 8192 and 4096 events per epoch are
// this design's choice, sized to the ranges of the paper's traffic plot.
module kf_monitor
  import kf_noc_pkg::*;
#(
  parameter int unsigned N_NODES      = 36,
  parameter int unsigned N_PUSH       = 72,   // injection points (nodes x subnets)
  parameter int unsigned EPOCH_CYCLES = 1000,
  parameter int unsigned PUSH_LOG2    = 12,
  parameter int unsigned SHADER_LOG2  = 13,
  parameter int unsigned DRAM_LOG2    = 12
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_PUSH-1:0]  push_ev,
  input  logic [N_NODES-1:0] shader_ev,
  input  logic [N_NODES-1:0] dram_ev,
  output logic               z_valid,
  output fx_t                z     [3],
  output logic [31:0]        count [3]   // raw totals of the last epoch
);
  localparam int unsigned EW = $clog2(EPOCH_CYCLES);
  localparam int unsigned LOG2 [3] = '{PUSH_LOG2, SHADER_LOG2, DRAM_LOG2};

  logic [EW-1:0] cyc;
  logic [31:0]   acc [3];
  logic [31:0]   inc [3];
  logic          last;

  function automatic logic [31:0] popcnt_n(input logic [N_NODES-1:0] v);
    logic [31:0] c;
    c = '0;
    for (int i = 0; i < int'(N_NODES); i++) c = c + 32'(v[i]);
    return c;
  endfunction

  function automatic logic [31:0] popcnt_p(input logic [N_PUSH-1:0] v);
    logic [31:0] c;
    c = '0;
    for (int i = 0; i < int'(N_PUSH); i++) c = c + 32'(v[i]);
    return c;
  endfunction

  function automatic fx_t normalise(input logic [31:0] c, input int unsigned l);
    longint cl, full;
    full = longint'(1) <<< l;
    cl   = (longint'(c) > full) ? full : longint'(c);
    return fx_t'(((cl <<< (KF_FRAC + 1)) >>> l) - (longint'(1) <<< KF_FRAC));
  endfunction

  assign inc[0] = popcnt_p(push_ev);
  assign inc[1] = popcnt_n(shader_ev);
  assign inc[2] = popcnt_n(dram_ev);
  assign last   = (32'(cyc) == EPOCH_CYCLES - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc     <= '0;
      acc     <= '{default: '0};
      count   <= '{default: '0};
      z       <= '{default: fx_t'(-(longint'(1) <<< KF_FRAC))};
      z_valid <= 1'b0;
    end else begin
      z_valid <= last;
      cyc     <= last ? '0 : cyc + 1'b1;
      for (int m = 0; m < 3; m++) begin
        if (last) begin
          count[m] <= acc[m] + inc[m];
          z[m]     <= normalise(acc[m] + inc[m], LOG2[m]);
          acc[m]   <= '0;
        end else begin
          acc[m]   <= acc[m] + inc[m];
        end
      end
    end
  end
endmodule
