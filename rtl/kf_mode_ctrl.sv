// kf_mode_ctrl -- rules for applying the Kalman-filter decision to the network.
//
// Implements the deployment rules of the paper:
//  * network resources start equally shared (mode 0);
//  * the filter's decisions are ignored until START_DELAY (10,000) cycles after
//    the GPU applications start running (gpu_active rising);
//  * after every reallocation the new mode is held for at least MIN_HOLD (5,000)
//    cycles; a decision that arrives meanwhile is remembered and applied when the
//    hold ends;
//  * once mode 1 (more resources to GPUs) has lasted MAX_BOOST (10,000) cycles,
//    the controller returns to equal sharing.
// The paper says only that such a return "might be advisable"; here it is always
// taken, and the pending decision is cleared so that mode 1 needs a fresh filter
// decision of 1 (this design's choice). gpu_active falling resets everything to
// mode 0. mode changes at a clock edge; counters count clock cycles.
module kf_mode_ctrl #(
  parameter int unsigned START_DELAY = 10000,
  parameter int unsigned MIN_HOLD    = 5000,
  parameter int unsigned MAX_BOOST   = 10000
)(
  input  logic clk,
  input  logic rst_n,
  input  logic gpu_active,   // GPU applications are running
  input  logic pred_valid,   // a new filter decision this cycle
  input  logic pred,         // the decision: 1 = give GPUs more resources
  output logic mode,         // 0: equal sharing, 1: favour GPU
  output logic enabled,      // START_DELAY has elapsed
  output logic forced_return // pulse: MAX_BOOST expired
);
  localparam int unsigned CW = $clog2(START_DELAY + MIN_HOLD + MAX_BOOST + 1);

  logic [CW-1:0] run_cnt;    // cycles since gpu_active rose (saturating)
  logic [CW-1:0] hold_cnt;   // cycles since last mode change (saturating)
  logic          target;     // latest decision not yet applied

  logic          nxt_target; // target including this cycle's decision

  assign enabled    = (32'(run_cnt) >= START_DELAY);
  assign nxt_target = (pred_valid && enabled) ? pred : target;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_cnt       <= '0;
      hold_cnt      <= '0;
      target        <= 1'b0;
      mode          <= 1'b0;
      forced_return <= 1'b0;
    end else if (!gpu_active) begin
      run_cnt       <= '0;
      hold_cnt      <= '0;
      target        <= 1'b0;
      mode          <= 1'b0;
      forced_return <= 1'b0;
    end else begin
      forced_return <= 1'b0;
      if (!enabled) run_cnt <= run_cnt + 1'b1;

      if (mode && (32'(hold_cnt) + 1 >= MAX_BOOST)) begin
        mode          <= 1'b0;
        hold_cnt      <= '0;
        target        <= 1'b0;
        forced_return <= 1'b1;
      end else if (enabled && (nxt_target != mode) && (32'(hold_cnt) + 1 >= MIN_HOLD)) begin
        mode     <= nxt_target;
        hold_cnt <= '0;
        target   <= nxt_target;
      end else begin
        target <= nxt_target;
        if (32'(hold_cnt) < MAX_BOOST) hold_cnt <= hold_cnt + 1'b1;
      end
    end
  end
endmodule
