// tb_adc_decode: random interleaved ADC words; checks time order, the
// offset-binary to two's-complement mapping (value = code - 512), the
// overflow OR and the one-clock latency against a model in the testbench.
module tb_adc_decode;
  localparam int C = 4, B = 10, P = 16, W = P / C;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [B-1:0] adc_data [C][W];
  logic [C-1:0] adc_ovr;
  logic out_valid, ovr;
  logic signed [B-1:0] samples [P];
  int checks = 0, failures = 0;

  adc_decode #(.ADC_CORES(C), .ADC_BITS(B), .SAMPLES_PER_CLK(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_s [P];
  logic exp_o;
  initial begin
    for (int c = 0; c < C; c++) for (int k = 0; k < W; k++) adc_data[c][k] = '0;
    adc_ovr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      in_valid = 1;
      for (int c = 0; c < C; c++) for (int k = 0; k < W; k++) begin
        adc_data[c][k] = B'($urandom);
        if (t == 0 && c == 0 && k == 0) adc_data[c][k] = 10'h000;   // most negative
        if (t == 1 && c == 0 && k == 0) adc_data[c][k] = 10'h3FF;   // most positive
        exp_s[k*C + c] = int'(adc_data[c][k]) - 512;
      end
      adc_ovr = ($urandom % 8 == 0) ? C'($urandom) : '0;
      exp_o = |adc_ovr;
      @(posedge clk); #1;
      checks++;
      if (!out_valid || ovr !== exp_o) begin
        failures++;
        $display("valid/ovr mismatch at t=%0d", t);
      end
      for (int s = 0; s < P; s++) begin
        checks++;
        if (int'(samples[s]) != exp_s[s]) begin
          failures++;
          if (failures < 10) $display("t=%0d s=%0d got %0d exp %0d", t, s, samples[s], exp_s[s]);
        end
      end
    end
    @(negedge clk) in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
