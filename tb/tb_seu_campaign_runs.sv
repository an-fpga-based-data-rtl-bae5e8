// tb_seu_campaign_runs: replays the three proton runs of the SEU campaign
// (runs 7, 8 and 9: 7, 9 and 4 upsets at fluences of 8e11, 8e11 and 4e11
// protons/cm^2) on the full 3000-bit register, with the clocks scaled down
// (CLK_HZ=20000, so 10 cycles per half shift-clock period, and a 5 ms hold)
// to keep the run short. Each run's upsets are spread over three test
// cycles at random bit positions; the watchdog is disabled as in the paper's
// second scenario. After each run the testbench reads the failure counter,
// checks it against the number injected and the per-cycle counts, and
// computes the per-bit cross-section sigma = N / (fluence * 3000), which must
// match the table values 2.92e-15, 3.75e-15 and 3.33e-15 cm^2/bit to the
// printed precision.
`timescale 1ns/1ps
module tb_seu_campaign_runs;
  import seu_pkg::*;
  localparam int unsigned LEN = SR_LEN_DEFAULT;
  localparam int IW = $clog2(LEN);
  localparam realtime TCLK = 50_000.0;   // 20 kHz

  logic clk = 0, rst_arty_n = 0, rst_dut_n = 0, run = 0;
  logic tx, wdi, shift, tmr_err, mismatch, done, sent;
  phase_e phase;
  logic [31:0] fails, cycles, last_fails;
  logic sr_upset = 0;
  logic [IW-1:0] sr_idx = '0;
  int checks = 0, failures = 0;

  seu_test_setup #(.CLK_HZ(20_000), .HOLD_MS(5), .BAUD(2_000), .HB_HALF_MS(100)) dut (
    .clk_arty(clk), .rst_arty_n(rst_arty_n), .run_i(run), .uart_tx_o(tx),
    .phase_o(phase), .fail_count_o(fails), .cycle_count_o(cycles),
    .last_cycle_fail_o(last_fails), .mismatch_o(mismatch), .cycle_done_o(done),
    .report_sent_o(sent), .clk_dut(clk), .rst_dut_n(rst_dut_n), .wdi_o(wdi),
    .shift_o(shift), .tmr_err_o(tmr_err), .sr_upset_i(sr_upset), .sr_upset_idx_i(sr_idx),
    .hb_upset_i(3'b000));

  always #(TCLK / 2) clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #2000s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One test cycle with n upsets at distinct random positions during HOLD.
  task automatic one_cycle(input int n);
    int pos[$];
    wait (phase == PH_HOLD);
    while (pos.size() < n) begin
      int p;
      p = $urandom % LEN;
      if (!(p inside {pos})) pos.push_back(p);
    end
    foreach (pos[k]) begin
      @(negedge clk) begin sr_upset = 1; sr_idx = IW'(pos[k]); end
      @(negedge clk) sr_upset = 0;
    end
    @(posedge done);
    @(negedge clk);
    check(last_fails == n, $sformatf("cycle: %0d upsets found, %0d injected", last_fails, n));
  endtask

  task automatic campaign_run(input int id, input int n_seu, input real fluence, input real sigma_table);
    int f0, split[3];
    real sigma;
    f0 = fails;
    split[0] = n_seu / 3;
    split[1] = n_seu / 3;
    split[2] = n_seu - 2 * (n_seu / 3);
    foreach (split[k]) one_cycle(split[k]);
    check(fails - f0 == n_seu, $sformatf("run %0d: counter %0d, expected %0d", id, fails - f0, n_seu));
    sigma = real'(fails - f0) / (fluence * real'(LEN));
    $display("run %0d: N=%0d fluence=%.1e sigma=%.3e cm^2/bit (table %.2e)", id, fails - f0, fluence, sigma, sigma_table);
    check(sigma / sigma_table > 0.995 && sigma / sigma_table < 1.005,
          $sformatf("run %0d cross-section %.3e vs %.2e", id, sigma, sigma_table));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_arty_n = 1;
    rst_dut_n  = 1;
    @(negedge clk) run = 1;
    campaign_run(7, 7, 8e11, 2.92e-15);
    campaign_run(8, 9, 8e11, 3.75e-15);
    campaign_run(9, 4, 4e11, 3.33e-15);
    check(cycles == 9, $sformatf("nine test cycles (%0d)", cycles));
    check(fails == 20, "20 upsets in total");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
