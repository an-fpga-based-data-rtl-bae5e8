// tb_seu_test_setup_large: one complete test cycle of the SEU test system at
// the largest size that simulates in a few minutes: the full 3000-bit register,
// 100 MHz clocks on both boards, 115200 Bd host link, 200 ms heartbeat and the
// watchdog model at its 0.8 s window, but a 10 kHz shift clock (instead of
// 1 kHz) and a 100 ms hold (instead of 1 s). At the defaults one cycle is 7 s
// of simulated time, which takes this simulator over ten minutes; this run is
// 0.7 s.
// The watchdog holds the DUT in reset for 1 ms after power-up (model
// parameter); the test cycle then starts, three register bits are flipped
// during the hold, and the test checks that exactly those three upsets are
// found and reported to the host with their bit positions, that the cycle
// takes 4*3000*5000 + 10000000 clock cycles (0.7 s), and that the heartbeat kept the
// watchdog from resetting the DUT.
`timescale 1ns/1ps
module tb_seu_test_setup_large;
  import seu_pkg::*;
  localparam int unsigned LEN = SR_LEN_DEFAULT;
  localparam longint unsigned PERIOD = 64'd4 * LEN * 5_000 + 64'd10_000_000;
  localparam int IW = $clog2(LEN);

  logic clk_arty = 0, clk_dut = 0;
  logic rst_arty_n = 0, run = 0, power_ok = 1;
  logic rst_dut_n, tx, wdi, shift, tmr_err, mismatch, done, sent;
  phase_e phase;
  logic [31:0] fails, cycles, last_fails;
  logic sr_upset = 0;
  logic [IW-1:0] sr_idx = '0;
  int wdt_resets, power_resets;
  int checks = 0, failures = 0;

  seu_test_setup #(.SCK_HZ(10_000), .HOLD_MS(100)) dut (
    .clk_arty(clk_arty), .rst_arty_n(rst_arty_n), .run_i(run), .uart_tx_o(tx),
    .phase_o(phase), .fail_count_o(fails), .cycle_count_o(cycles),
    .last_cycle_fail_o(last_fails), .mismatch_o(mismatch), .cycle_done_o(done),
    .report_sent_o(sent), .clk_dut(clk_dut), .rst_dut_n(rst_dut_n), .wdi_o(wdi),
    .shift_o(shift), .tmr_err_o(tmr_err), .sr_upset_i(sr_upset), .sr_upset_idx_i(sr_idx),
    .hb_upset_i(3'b000));

  tps3306_model #(.RESET_DELAY_NS(64'd1_000_000)) wd (
    .power_ok(power_ok), .wdt_enable(1'b1), .wdi(wdi), .rst_n(rst_dut_n),
    .wdt_resets(wdt_resets), .power_resets(power_resets));

  // Host side of the UART (8N1, DIV clock cycles per bit), sampled mid-bit.
  localparam int unsigned DIV = CLK_HZ_DEFAULT / BAUD_DEFAULT;
  logic [7:0] rx_bytes[$];
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge tx);
      #(DIV * 5ns);
      for (int i = 0; i < 8; i++) begin
        #(DIV * 10ns);
        b[i] = tx;
      end
      #(DIV * 10ns);
      if (tx) rx_bytes.push_back(b);
    end
  end

  // Both boards run at 100 MHz; their clocks toggle together here, which
  // halves the simulator's work and changes nothing for the logic, since the
  // cable signals cross through synchronisers anyway.
  always #5 begin
    clk_arty = ~clk_arty;
    clk_dut  = ~clk_dut;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #2s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Time stamps and counts are taken from events only (no per-cycle monitor).
  realtime t_start, t_done;
  int idx_seen[$];
  int n_toggle = 0;
  initial begin
    logic w = 0;
    forever begin
      #10us;
      if (rst_dut_n && wdi != w) n_toggle++;
      w = wdi;
    end
  end
  initial begin
    wait (phase == PH_WRITE);
    t_start = $realtime;
    @(posedge done);
    t_done = $realtime;
  end

  initial begin
    int pos[3] = '{2999, 1500, 7};
    repeat (4) @(posedge clk_arty);
    rst_arty_n = 1;
    wait (rst_dut_n == 1);
    @(negedge clk_arty) run = 1;
    wait (phase == PH_HOLD);
    @(negedge clk_arty) run = 0;      // a single cycle
    #20ms;
    foreach (pos[k]) begin
      @(negedge clk_dut) begin sr_upset = 1; sr_idx = IW'(pos[k]); end
      @(negedge clk_dut) sr_upset = 0;
    end
    @(posedge done);
    #2ms;
    check(last_fails == 3 && fails == 3, $sformatf("upsets found %0d, expected 3", fails));
    // read order: bit i read is the i-th written, which sits at position LEN-1-i
    idx_seen = '{LEN - 1 - 2999, LEN - 1 - 1500, LEN - 1 - 7};
    // from the edge that enters WRITE to the edge that raises cycle_done_o
    check(longint'((t_done - t_start) / 10.0) == PERIOD,
          $sformatf("cycle took %0d clock cycles, expected %0d", longint'((t_done - t_start) / 10.0), PERIOD));
    check(rx_bytes.size() == 15, $sformatf("report bytes %0d, expected 15", rx_bytes.size()));
    for (int m = 0; m < 3 && rx_bytes.size() >= 5; m++) begin
      logic [7:0] b [5];
      foreach (b[k]) b[k] = rx_bytes.pop_front();
      check(b[0] == REPORT_SYNC && {b[1], b[2]} == 16'(m + 1) && {b[3], b[4]} == 16'(idx_seen[m]),
            $sformatf("report %0d: %h %h%h %h%h", m, b[0], b[1], b[2], b[3], b[4]));
    end
    check(wdt_resets == 0, "no watchdog reset while the heartbeat runs");
    check(n_toggle >= 3, $sformatf("heartbeat toggles %0d", n_toggle));
    check(cycles == 1 && phase == PH_IDLE, "one cycle, then idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
