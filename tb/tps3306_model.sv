// tps3306_model: behavioural model of the external supervisory watchdog on
// the PP3-FPGA module (a TPS3306-class voltage supervisor with watchdog).
// Not synthesizable: it works in simulated time.
//
// rst_n is held low while power_ok is low and for RESET_DELAY_NS after it
// rises. Afterwards, if wdt_enable is high and wdi has not changed for
// TIMEOUT_NS, rst_n is pulled low for RESET_DELAY_NS (on the real board this
// restarts the FPGA, which reloads its configuration from flash). With
// wdt_enable low only the supply supervision acts. The 0.8 s default window is
// the one the test used; the 200 ms reset delay is the device's typical
// value. wdi is sampled every POLL_NS, far shorter than any heartbeat
// interval. wdt_resets and power_resets count the two kinds of reset.
`timescale 1ns/1ps
module tps3306_model #(
  parameter longint unsigned TIMEOUT_NS     = 64'd800_000_000,
  parameter longint unsigned RESET_DELAY_NS = 64'd200_000_000,
  parameter longint unsigned POLL_NS        = 64'd10_000
) (
  input  logic power_ok,
  input  logic wdt_enable,
  input  logic wdi,
  output logic rst_n,
  output int   wdt_resets,
  output int   power_resets
);
  longint unsigned last_kick = 0;
  logic            wdi_seen  = 1'b0;

  initial begin
    rst_n        = 1'b0;
    wdt_resets   = 0;
    power_resets = 0;
    forever begin
      wait (power_ok === 1'b1);
      #(RESET_DELAY_NS);
      if (power_ok === 1'b1) begin
        rst_n     = 1'b1;
        last_kick = $time;
        wdi_seen  = wdi;
        while (power_ok === 1'b1 &&
               !(wdt_enable === 1'b1 && ($time - last_kick) >= TIMEOUT_NS)) begin
          #(POLL_NS);
          // a transition on wdi, seen at the POLL_NS sampling grid, restarts the window
          if (wdi !== wdi_seen || wdt_enable !== 1'b1) last_kick = $time;
          wdi_seen = wdi;
        end
        rst_n = 1'b0;
        if (power_ok === 1'b1) wdt_resets++;
        else                   power_resets++;
      end
    end
  end
endmodule
