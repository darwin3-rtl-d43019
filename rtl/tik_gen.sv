// tik_gen: global time-step generator of the chip.
//
// A free-running counter divides the system clock by a programmable period
// and toggles `gstep` once per period; every neuron core detects the toggle
// and starts a time step (for example a 1 ms step at 333 MHz is a period of
// 333,000 cycles). A toggle rather than a pulse is used so the step can be
// synchronised into other clock islands. `tick` is the same event as a
// one-cycle pulse in this clock domain. The design names this block only;
// the counter is this implementation's own, and period 0 stops the ticks.
module tik_gen #(
  parameter int unsigned PW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  input  logic [PW-1:0] period,
  output logic          gstep,
  output logic          tick
);
  logic [PW-1:0] cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; gstep <= 1'b0; tick <= 1'b0;
    end else begin
      tick <= 1'b0;
      if (!enable || period == '0) cnt <= '0;
      else if (cnt >= period - 1'b1) begin
        cnt <= '0; gstep <= ~gstep; tick <= 1'b1;
      end else cnt <= cnt + 1'b1;
    end
  end
endmodule
