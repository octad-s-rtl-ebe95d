// power_detector: squarer behind the FFT cores.
// For every lane and bin it forms |X|^2 = re^2 + im^2 of the FFT output, the
// self-multiplication drawn after the FFT in the instrument's block diagram.
// With 16-bit signed re and im the sum is below 2**31 and fits the 32-bit
// power word without rounding. Interface: in_valid/in_bin/in_re/in_im from
// the FFT cores, out_valid/out_bin/out_power per lane.
// Latency: two clocks (products, then sum); one bin per lane per clock.
// The 32-bit power resolution is the paper's; the 16-bit FFT output width is
// this design's choice.
module power_detector #(
  parameter int unsigned N_FFT      = 4096,
  parameter int unsigned NUM_FFT    = 16,
  parameter int unsigned FFT_BITS   = 16,
  parameter int unsigned POWER_BITS = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [$clog2(N_FFT)-1:0]   in_bin,
  input  logic signed [FFT_BITS-1:0] in_re [NUM_FFT],
  input  logic signed [FFT_BITS-1:0] in_im [NUM_FFT],
  output logic                       out_valid,
  output logic [$clog2(N_FFT)-1:0]   out_bin,
  output logic [POWER_BITS-1:0]      out_power [NUM_FFT]
);
  localparam int unsigned IW = $clog2(N_FFT);
  localparam int unsigned QW = 2 * FFT_BITS;

  initial begin
    assert (POWER_BITS >= QW) else $error("POWER_BITS too small for FFT_BITS");
  end

  logic [QW-1:0] sq_re [NUM_FFT];
  logic [QW-1:0] sq_im [NUM_FFT];
  logic          v1;
  logic [IW-1:0] bin1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      bin1      <= '0;
      out_valid <= 1'b0;
      out_bin   <= '0;
      for (int j = 0; j < NUM_FFT; j++) begin
        sq_re[j]     <= '0;
        sq_im[j]     <= '0;
        out_power[j] <= '0;
      end
    end else begin
      v1        <= in_valid;
      bin1      <= in_bin;
      out_valid <= v1;
      out_bin   <= bin1;
      for (int j = 0; j < NUM_FFT; j++) begin
        sq_re[j]     <= in_re[j] * in_re[j];
        sq_im[j]     <= in_im[j] * in_im[j];
        out_power[j] <= POWER_BITS'(sq_re[j]) + POWER_BITS'(sq_im[j]);
      end
    end
  end
endmodule
