// pp3_test_firmware: the firmware loaded into the PP3-FPGA module (the device
// under test) for the proton-beam SEU campaign.
//
// It holds two independent parts. The upset sensor, seu_shift_register, is
// written and read over the flat cable by the control board (sck_i, sdi_i,
// sdo_o). The heartbeat, heartbeat_gen, keeps the external supervisory
// watchdog from resetting the FPGA (wdi_o); when the watchdog is enabled and
// the heartbeat stops, for instance because an upset broke the clocking, the
// watchdog resets the FPGA and a fresh configuration is loaded from flash.
// That reset arrives here as rst_n. The heartbeat is triple-redundant; the
// shift register is deliberately not, since it must record upsets.
//
// sr_upset_i/sr_upset_idx_i and hb_upset_i are simulation hooks that emulate
// upsets in the two parts; they are tied low in hardware.
//
// From the paper: the 3000-bit shift register, the heartbeat to an external
// watchdog with a 0.8 s window, TMR in the firmware. The interface signals and
// the clock rate are this design's choices.
module pp3_test_firmware
  import seu_pkg::*;
#(
  parameter int unsigned LEN        = SR_LEN_DEFAULT,
  parameter int unsigned CLK_HZ     = CLK_HZ_DEFAULT,
  parameter int unsigned HB_HALF_MS = HB_HALF_MS_DEFAULT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // flat cable to the control board
  input  logic                   sck_i,
  input  logic                   sdi_i,
  output logic                   sdo_o,
  // external watchdog
  output logic                   wdi_o,
  // status
  output logic                   shift_o,
  output logic                   tmr_err_o,
  // upset emulation (tie low in hardware)
  input  logic                   sr_upset_i,
  input  logic [$clog2(LEN)-1:0] sr_upset_idx_i,
  input  logic [2:0]             hb_upset_i
);
  seu_shift_register #(.LEN(LEN)) u_sr (
    .clk        (clk),
    .rst_n      (rst_n),
    .sck_i      (sck_i),
    .sdi_i      (sdi_i),
    .sdo_o      (sdo_o),
    .shift_o    (shift_o),
    .upset_i    (sr_upset_i),
    .upset_idx_i(sr_upset_idx_i)
  );

  heartbeat_gen #(.CLK_HZ(CLK_HZ), .HALF_MS(HB_HALF_MS)) u_hb (
    .clk      (clk),
    .rst_n    (rst_n),
    .upset_i  (hb_upset_i),
    .wdi_o    (wdi_o),
    .tmr_err_o(tmr_err_o)
  );
endmodule
