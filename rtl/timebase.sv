// timebase: local copy of the global 40 MHz clock cycle and of the 27-bit
// coarse time counter that every front-end board also runs.
//
// The trigger logic runs on a faster processing clock `clk` so that it can take
// more than one packet per 25 ns cycle. `tick` is a one-clock enable that marks
// each 40 MHz global cycle: it is high once every CLK_PER_TICK clocks. The
// coarse time `now` advances by one on every tick and wraps at 2^27, like the
// front-end counter. `time_load` overwrites it (with `time_value`, which then
// counts from the next tick on) so that the counter can be aligned with the
// clock distribution system.
//
// Source design: the 40 MHz global clock and the 27-bit coarse counter. Own
// choices: the processing clock is CLK_PER_TICK = 4 times faster (160 MHz), the
// load port and the reset value 0.
module timebase #(
  parameter int unsigned CLK_PER_TICK = 4,
  parameter int unsigned TIME_W       = 27
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              time_load,
  input  logic [TIME_W-1:0] time_value,
  output logic              tick,
  output logic [TIME_W-1:0] now
);
  localparam int unsigned DIV_W = (CLK_PER_TICK > 1) ? $clog2(CLK_PER_TICK) : 1;

  logic [DIV_W-1:0] div;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div  <= '0;
      tick <= 1'b0;
      now  <= '0;
    end else begin
      tick <= (div == DIV_W'(CLK_PER_TICK - 1));
      div  <= (div == DIV_W'(CLK_PER_TICK - 1)) ? '0 : div + 1'b1;
      if (time_load)  now <= time_value;
      else if (tick)  now <= now + 1'b1;
    end
  end

  initial assert (CLK_PER_TICK >= 3)
    else $error("timebase: the trigger path needs at least 3 clocks per tick");
endmodule
