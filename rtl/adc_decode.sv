// adc_decode: linear decoding of the time-interleaved ADC.
// The ADC interleaves ADC_CORES converter cores; each delivers
// SAMPLES_PER_CLK/ADC_CORES offset-binary words per FPGA clock. Core c holds
// the samples whose time index within the clock's block is k*ADC_CORES + c
// for its k-th word. The decoder puts the words back in time order and turns
// offset binary into two's complement (invert the MSB), which is the linear
// decoding the instrument applies. The per-core overflow bits are ORed into
// one overflow flag per clock.
// Interface: in_valid/adc_data/adc_ovr in, out_valid/samples/ovr out.
// Timing: one register stage, a block of SAMPLES_PER_CLK samples every clock.
// The paper gives the 10-bit ADC, the four cores and the overflow bit; the
// word order and the offset-binary coding are this design's assumptions.
module adc_decode #(
  parameter int unsigned ADC_CORES       = 4,
  parameter int unsigned ADC_BITS        = 10,
  parameter int unsigned SAMPLES_PER_CLK = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [ADC_BITS-1:0]        adc_data [ADC_CORES][SAMPLES_PER_CLK/ADC_CORES],
  input  logic [ADC_CORES-1:0]       adc_ovr,
  output logic                       out_valid,
  output logic signed [ADC_BITS-1:0] samples [SAMPLES_PER_CLK],
  output logic                       ovr
);
  localparam int unsigned WPC = SAMPLES_PER_CLK / ADC_CORES;

  initial begin
    assert (SAMPLES_PER_CLK % ADC_CORES == 0)
      else $error("SAMPLES_PER_CLK must be a multiple of ADC_CORES");
  end

  logic signed [ADC_BITS-1:0] dec [SAMPLES_PER_CLK];

  always_comb begin
    for (int k = 0; k < WPC; k++)
      for (int c = 0; c < ADC_CORES; c++)
        dec[k*ADC_CORES + c] = {~adc_data[c][k][ADC_BITS-1], adc_data[c][k][ADC_BITS-2:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      ovr       <= 1'b0;
      for (int i = 0; i < SAMPLES_PER_CLK; i++) samples[i] <= '0;
    end else begin
      out_valid <= in_valid;
      ovr       <= in_valid && (|adc_ovr);
      if (in_valid) samples <= dec;
    end
  end
endmodule
