// seu_test_setup: the complete SEU test system, the control board and the
// device under test joined by their flat cable.
//
// The control board (seu_tester, on the Arty A7 data generator) runs in its
// own clock domain clk_arty and drives the three-wire cable: shift clock and
// data towards the DUT, register output back. The DUT (pp3_test_firmware, on
// the PP3-FPGA module) runs on clk_dut; its rst_dut_n is the reset from the
// external supervisory watchdog, to which it sends its heartbeat on wdi_o.
// The watchdog itself, the flash that holds the configuration copies, the
// power supply and the host computer are outside the FPGAs and therefore not
// part of this module: their signals are ports (rst_dut_n, wdi_o, uart_tx_o).
//
// With the defaults one test cycle writes 3000 bits at 1 kHz, holds for 1 s
// and reads the 3000 bits back, 7 s in all, and repeats while run_i is high.
// Every upset found in the register increments fail_count_o and sends a report
// to the host. The sr_upset_* and hb_upset_i ports emulate particle hits in
// simulation and are tied low in hardware.
//
// From the paper: the arrangement of the beam-test setup (DUT, data
// generator, host link, external watchdog) and the numbers named in the
// submodules. Port names, clock rates and the emulation ports are this
// design's choices.
module seu_test_setup
  import seu_pkg::*;
#(
  parameter int unsigned LEN        = SR_LEN_DEFAULT,
  parameter int unsigned CLK_HZ     = CLK_HZ_DEFAULT,
  parameter int unsigned SCK_HZ     = SCK_HZ_DEFAULT,
  parameter int unsigned HOLD_MS    = HOLD_MS_DEFAULT,
  parameter int unsigned BAUD       = BAUD_DEFAULT,
  parameter int unsigned HB_HALF_MS = HB_HALF_MS_DEFAULT
) (
  // control board
  input  logic                   clk_arty,
  input  logic                   rst_arty_n,
  input  logic                   run_i,
  output logic                   uart_tx_o,
  output phase_e                 phase_o,
  output logic [31:0]            fail_count_o,
  output logic [31:0]            cycle_count_o,
  output logic [31:0]            last_cycle_fail_o,
  output logic                   mismatch_o,
  output logic                   cycle_done_o,
  output logic                   report_sent_o,
  // device under test
  input  logic                   clk_dut,
  input  logic                   rst_dut_n,
  output logic                   wdi_o,
  output logic                   shift_o,
  output logic                   tmr_err_o,
  // upset emulation (tie low in hardware)
  input  logic                   sr_upset_i,
  input  logic [$clog2(LEN)-1:0] sr_upset_idx_i,
  input  logic [2:0]             hb_upset_i
);
  // Flat cable.
  logic cable_sck, cable_to_dut, cable_from_dut;

  seu_tester #(
    .LEN(LEN), .CLK_HZ(CLK_HZ), .SCK_HZ(SCK_HZ), .HOLD_MS(HOLD_MS), .BAUD(BAUD)
  ) u_arty (
    .clk              (clk_arty),
    .rst_n            (rst_arty_n),
    .run_i            (run_i),
    .sck_o            (cable_sck),
    .sdo_o            (cable_to_dut),
    .sdi_i            (cable_from_dut),
    .tx_o             (uart_tx_o),
    .phase_o          (phase_o),
    .fail_count_o     (fail_count_o),
    .cycle_count_o    (cycle_count_o),
    .last_cycle_fail_o(last_cycle_fail_o),
    .mismatch_o       (mismatch_o),
    .cycle_done_o     (cycle_done_o),
    .report_sent_o    (report_sent_o)
  );

  pp3_test_firmware #(
    .LEN(LEN), .CLK_HZ(CLK_HZ), .HB_HALF_MS(HB_HALF_MS)
  ) u_dut (
    .clk           (clk_dut),
    .rst_n         (rst_dut_n),
    .sck_i         (cable_sck),
    .sdi_i         (cable_to_dut),
    .sdo_o         (cable_from_dut),
    .wdi_o         (wdi_o),
    .shift_o       (shift_o),
    .tmr_err_o     (tmr_err_o),
    .sr_upset_i    (sr_upset_i),
    .sr_upset_idx_i(sr_upset_idx_i),
    .hb_upset_i    (hb_upset_i)
  );
endmodule
