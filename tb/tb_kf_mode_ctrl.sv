// tb_kf_mode_ctrl -- the deployment rules with short timers (start delay 100,
// minimum hold 50, maximum boost 120 cycles). Filter decisions arrive every 20
// cycles. Checked: no change before the start delay even though the filter asks
// for mode 1; the switch to 1 at the first decision after the delay; the forced
// return to 0 exactly 120 cycles later; the 50-cycle hold before mode 1 can come
// back; a decision of 0 taken immediately after a switch is deferred to exactly
// the end of the hold; gpu_active falling resets to mode 0.
module tb_kf_mode_ctrl;
  localparam int SD = 100, MH = 50, MB = 120;
  logic clk = 0, rst_n = 0;
  logic gpu_active = 0, pred_valid = 0, pred = 0;
  logic mode, enabled, forced_return;
  int checks = 0, failures = 0, cyc = 0;
  int t_start, t_on1, t_off1, t_on2, t_off2, n_forced = 0;

  always #5 clk = ~clk;
  kf_mode_ctrl #(.START_DELAY(SD), .MIN_HOLD(MH), .MAX_BOOST(MB)) dut (
    .clk, .rst_n, .gpu_active, .pred_valid, .pred, .mode, .enabled, .forced_return);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (forced_return) n_forced <= n_forced + 1;
  end

  // decisions every 20 cycles
  logic want = 1;
  always @(negedge clk) begin
    pred_valid <= (cyc % 20 == 0);
    pred       <= want;
  end

  task automatic check(input bit cond, input string s);
    checks++;
    if (!cond) begin failures++; $display("FAIL cyc %0d: %s", cyc, s); end
  endtask

  task automatic wait_mode(input logic m, output int t);
    int guard = 0;
    while (mode != m && guard < 1000) begin @(posedge clk); #1; guard++; end
    t = cyc;
  endtask

  initial begin
    #12 rst_n = 1;
    repeat (30) @(posedge clk);
    check(mode == 0, "mode 0 while GPU idle");
    @(negedge clk) gpu_active = 1;
    t_start = cyc;
    wait_mode(1, t_on1);
    check(t_on1 - t_start >= SD, $sformatf("switched %0d cycles after start, before the delay", t_on1 - t_start));
    check(t_on1 - t_start <= SD + 22, "switch long after the delay");
    wait_mode(0, t_off1);
    check(t_off1 - t_on1 == MB, $sformatf("boost lasted %0d, expected %0d", t_off1 - t_on1, MB));
    check(n_forced == 1, "forced_return pulse");
    wait_mode(1, t_on2);
    check(t_on2 - t_off1 == MH, $sformatf("re-entry after %0d, expected %0d", t_on2 - t_off1, MH));
    @(negedge clk) want = 0;     // the next decisions ask for mode 0
    wait_mode(0, t_off2);
    check(t_off2 - t_on2 == MH, $sformatf("return after %0d, expected hold %0d", t_off2 - t_on2, MH));
    @(negedge clk) want = 1;
    wait_mode(1, t_on1);
    check(t_on1 - t_off2 == MH, "mode 1 again after the hold");
    @(negedge clk) gpu_active = 0;
    @(posedge clk); #1;
    check(mode == 0 && !enabled, "gpu_active low resets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
