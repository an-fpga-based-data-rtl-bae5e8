// tb_seu_test_setup: end-to-end test of the whole SEU test system at reduced
// timing, with a behavioural model of the external watchdog.
// Parameters: LEN=200, CLK_HZ=200000 for both boards (5 us clock),
// SCK_HZ=1000, HOLD_MS=100, BAUD=100000, HB_HALF_MS=10; the watchdog window
// is scaled to 40 ms and its reset delay to 10 ms (the same ratios to the
// heartbeat as 0.8 s and 200 ms to the default 200 ms).
// Sequence, one test cycle (write 200 bits, hold 100 ms, read back) each:
//   power-up: the watchdog holds the DUT in reset until the supply is good;
//   cycle 1: two register upsets and one heartbeat-copy upset in HOLD; the
//            heartbeat keeps the watchdog quiet, the TMR masks its upset;
//   cycle 2: the DUT clock stops for 50 ms in HOLD (watchdog enabled): the
//            heartbeat stops, the watchdog resets the DUT, the register is
//            cleared, and every 1 of the pattern reads back as an upset;
//   cycle 3: watchdog disabled, same clock stop plus one upset: no reset,
//            only the upset is found.
// Checked: failure counts per cycle against values computed here (the PRBS-7
// pattern is regenerated independently), the reports decoded from the host
// UART, the cycle period 4*LEN*HALF+HOLD_CYC, and that every mechanism
// occurred; a mechanism that never occurred counts as a failure.
`timescale 1ns/1ps
module tb_seu_test_setup;
  import seu_pkg::*;
  localparam int unsigned LEN = 200, CLK_HZ = 200_000, HOLD_MS = 100;
  localparam int unsigned HALF = CLK_HZ / 2000, HOLD_CYC = CLK_HZ / 1000 * HOLD_MS;
  localparam int unsigned PERIOD = 4 * LEN * HALF + HOLD_CYC;
  localparam int unsigned DIV = 2;
  localparam realtime TCLK = 5000.0;   // ns
  localparam int IW = $clog2(LEN);

  logic clk_arty = 0, clk_dut = 0, dut_clk_en = 1;
  logic rst_arty_n = 0, run = 0;
  logic power_ok = 0, wdt_en = 1;
  logic rst_dut_n;
  logic tx, wdi, shift, tmr_err, mismatch, done, sent;
  phase_e phase;
  logic [31:0] fails, cycles, last_fails;
  logic sr_upset = 0;
  logic [IW-1:0] sr_idx = '0;
  logic [2:0] hb_upset = '0;
  int wdt_resets, power_resets;
  int checks = 0, failures = 0;

  seu_test_setup #(
    .LEN(LEN), .CLK_HZ(CLK_HZ), .SCK_HZ(1000), .HOLD_MS(HOLD_MS), .BAUD(100_000), .HB_HALF_MS(10)
  ) dut (
    .clk_arty(clk_arty), .rst_arty_n(rst_arty_n), .run_i(run), .uart_tx_o(tx),
    .phase_o(phase), .fail_count_o(fails), .cycle_count_o(cycles),
    .last_cycle_fail_o(last_fails), .mismatch_o(mismatch), .cycle_done_o(done),
    .report_sent_o(sent), .clk_dut(clk_dut), .rst_dut_n(rst_dut_n), .wdi_o(wdi),
    .shift_o(shift), .tmr_err_o(tmr_err), .sr_upset_i(sr_upset), .sr_upset_idx_i(sr_idx),
    .hb_upset_i(hb_upset));

  tps3306_model #(.TIMEOUT_NS(64'd40_000_000), .RESET_DELAY_NS(64'd10_000_000), .POLL_NS(64'd5_000)) wd (
    .power_ok(power_ok), .wdt_enable(wdt_en), .wdi(wdi), .rst_n(rst_dut_n),
    .wdt_resets(wdt_resets), .power_resets(power_resets));

  uart_rx_model #(.DIV(DIV)) rx (.clk(clk_arty), .rx(tx));

  always #(TCLK / 2) clk_arty = ~clk_arty;
  initial begin
    #1300;
    forever begin
      #(TCLK / 2);
      if (dut_clk_en) clk_dut = ~clk_dut;
    end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #3s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters.
  int n_write = 0, n_hold = 0, n_read = 0, n_mismatch = 0, n_report = 0, n_tmr = 0;
  int n_shift = 0, n_hb_toggle = 0, n_done = 0;
  phase_e phase_prev = PH_IDLE;
  logic wdi_prev = 0;
  int now = 0;
  int done_times[$];
  always @(posedge clk_arty) if (rst_arty_n) begin
    now++;
    if (phase != phase_prev) begin
      if (phase == PH_WRITE) n_write++;
      if (phase == PH_HOLD)  n_hold++;
      if (phase == PH_READ)  n_read++;
    end
    phase_prev = phase;
    if (mismatch) n_mismatch++;
    if (sent) n_report++;
    if (done) begin n_done++; done_times.push_back(now); end
  end
  always @(posedge clk_dut) if (rst_dut_n) begin
    if (tmr_err) n_tmr++;
    if (shift) n_shift++;
    if (wdi != wdi_prev) n_hb_toggle++;
    wdi_prev = wdi;
  end

  // Number of ones among the first LEN pattern bits (PRBS-7, x^7+x^6+1,
  // seed all ones, output = MSB), computed independently of the design.
  function automatic int pattern_ones();
    bit [6:0] s = 7'h7F;
    int n = 0;
    for (int i = 0; i < LEN; i++) begin
      n += s[6];
      s = {s[5:0], s[6] ^ s[5]};
    end
    return n;
  endfunction

  task automatic end_of_cycle(input int exp_fail, input string name);
    @(posedge done);
    @(negedge clk_arty);
    check(last_fails == exp_fail, $sformatf("%s: %0d upsets found, expected %0d", name, last_fails, exp_fail));
  endtask

  task automatic sr_hit(input int pos);
    @(negedge clk_dut);
    sr_upset = 1; sr_idx = IW'(pos);
    @(negedge clk_dut);
    sr_upset = 0;
  endtask

  initial begin
    int ones, reports;
    logic [15:0] last_cnt;
    ones = pattern_ones();
    // power-up
    #1ms;
    check(rst_dut_n == 0, "DUT held in reset while the supply is low");
    power_ok = 1;
    repeat (4) @(posedge clk_arty);
    rst_arty_n = 1;
    wait (rst_dut_n == 1);
    @(posedge clk_arty);
    run = 1;
    // cycle 1
    wait (phase == PH_HOLD);
    #5ms;
    sr_hit(17);
    sr_hit(150);
    @(negedge clk_dut) hb_upset = 3'b100;
    @(negedge clk_dut) hb_upset = 3'b000;
    end_of_cycle(2, "cycle 1");
    check(wdt_resets == 0, "no watchdog reset while the heartbeat runs");
    // cycle 2: clock failure, watchdog enabled
    wait (phase == PH_HOLD);
    #2ms;
    dut_clk_en = 0;
    #50ms;
    dut_clk_en = 1;
    end_of_cycle(ones, "cycle 2 (DUT reset by watchdog)");
    check(wdt_resets == 1, $sformatf("one watchdog reset (%0d)", wdt_resets));
    // cycle 3: clock failure, watchdog disabled, one upset; stop afterwards
    wait (phase == PH_HOLD);
    wdt_en = 0;
    run = 0;
    #2ms;
    dut_clk_en = 0;
    #50ms;
    dut_clk_en = 1;
    sr_hit(99);
    end_of_cycle(1, "cycle 3 (watchdog disabled)");
    check(wdt_resets == 1, "no reset with the watchdog disabled");
    check(fails == 32'(3 + ones), $sformatf("total failures %0d exp %0d", fails, 3 + ones));
    check(cycles == 3, "three cycles");
    #20ms;
    check(phase == PH_IDLE, "idle after run dropped");
    if (done_times.size() >= 2)
      check(done_times[1] - done_times[0] == PERIOD,
            $sformatf("cycle period %0d exp %0d", done_times[1] - done_times[0], PERIOD));
    // host reports: every message well formed, counts rising, last one the total
    reports = 0;
    last_cnt = 0;
    while (rx.bytes.size() >= 5) begin
      logic [7:0] b [5];
      foreach (b[k]) b[k] = rx.bytes.pop_front();
      check(b[0] == REPORT_SYNC, "report sync byte");
      check({b[1], b[2]} > last_cnt, "report counts rise");
      last_cnt = {b[1], b[2]};
      reports++;
    end
    check(reports == n_report && reports > 0, $sformatf("reports decoded %0d, sent %0d", reports, n_report));
    check(last_cnt == 16'(3 + ones), "last report carries the total");
    check(rx.framing_errors == 0, "uart framing");
    // every mechanism happened
    $display("write=%0d hold=%0d read=%0d shifts=%0d mismatches=%0d reports=%0d tmr=%0d hb_toggles=%0d wdt_resets=%0d power_hold=%0d",
             n_write, n_hold, n_read, n_shift, n_mismatch, n_report, n_tmr, n_hb_toggle, wdt_resets, 1);
    check(n_write == 3 && n_hold == 3 && n_read == 3, "three write/hold/read phases");
    check(n_shift == 6 * LEN, $sformatf("DUT shifts %0d exp %0d", n_shift, 6 * LEN));
    check(n_mismatch == 3 + ones, "mismatch pulses");
    check(n_report > 0, "host reports sent");
    // the link is faster than the shift clock here, as in the real setup, so
    // every upset gets a report of its own
    check(n_report == n_mismatch, "one report per upset");
    check(n_tmr == 1, "TMR disagreement seen and scrubbed");
    check(n_hb_toggle > 20, "heartbeat toggled");
    check(wdt_resets == 1, "watchdog reset happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
