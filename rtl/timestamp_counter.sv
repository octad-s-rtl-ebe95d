// timestamp_counter: hardware time for the spectrum headers.
// A TS_BITS-wide counter advances by one every clock; a command can load an
// absolute value (load/load_value), after which it keeps counting from it.
// The instrument's clocks are locked to an external 10 MHz reference, so the
// count is a time in FPGA clock periods. The paper states only that each
// header holds a hardware timestamp; width, unit and load command are this
// design's choices. Timing: time_now is registered, load takes effect on
// the next clock.
module timestamp_counter #(
  parameter int unsigned TS_BITS = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic [TS_BITS-1:0] load_value,
  output logic [TS_BITS-1:0] time_now
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    time_now <= '0;
    else if (load) time_now <= load_value;
    else           time_now <= time_now + 1'b1;
  end
endmodule
