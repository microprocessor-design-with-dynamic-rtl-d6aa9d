// phase_shift: counter that stretches the master clock CLK into the processor
// clock clk.
//
// A 4-bit counter counts master-clock rising edges from 0 up to shift_value
// and then returns to 0, so one period of clk lasts shift_value+1 master
// periods. clk is registered: it is 1 while the counter is below
// shift_value/2 and 0 otherwise, so the low phase is the longer one. A rising
// edge of clk comes one master cycle after the counter wraps to 0, i.e. when
// the counter steps from 0 to 1. The shift value may change right after that
// edge (a new instruction is fetched); the period that follows is then
// governed by the new value. rst (synchronous to CLK) holds the counter at 0,
// which keeps clk high; the first rising edge after reset ends the first
// instruction.
//
// The counter and comparison follow the published phase shifter. There the
// reset and the count were two processes driving the same counter; here they
// are one process in which reset has priority. shift_value must be at least 2
// (otherwise clk never rises); the assertion checks that.
module phase_shift (
  input  logic       CLK,          // master clock
  input  logic       rst,
  input  logic [3:0] shift_value,
  output logic       clk           // processor clock
);

  logic [3:0] count;

  always_ff @(posedge CLK) begin
    if (rst)                       count <= '0;
    else if (count < shift_value)  count <= count + 4'd1;
    else                           count <= '0;
  end

  always_ff @(posedge CLK) begin
    clk <= (count < (shift_value >> 1));
  end

  a_shift_min: assert property (@(posedge CLK) disable iff (rst) shift_value >= 4'd2)
    else $error("phase_shift: shift_value %0d gives no clock edge", shift_value);

endmodule
