// tb_power_detector: random and extreme complex inputs on every lane; checks
// re^2 + im^2 exactly (including -32768, the largest magnitude), the bin
// tag and the two-clock latency.
module tb_power_detector;
  localparam int N = 64, M = 4;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [$clog2(N)-1:0] in_bin = 0, out_bin;
  logic signed [15:0] in_re [M], in_im [M];
  logic out_valid;
  logic [31:0] out_power [M];
  int checks = 0, failures = 0;

  power_detector #(.N_FFT(N), .NUM_FFT(M), .FFT_BITS(16), .POWER_BITS(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint exp_p [$][M];
  int exp_b [$];
  int exp_v [$];

  initial begin
    longint e [M];
    for (int j = 0; j < M; j++) begin in_re[j] = 0; in_im[j] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = (t % 7) != 3;
      in_bin = t[5:0];
      for (int j = 0; j < M; j++) begin
        in_re[j] = 16'($urandom);
        in_im[j] = 16'($urandom);
        if (t == 5) begin in_re[j] = -32768; in_im[j] = -32768; end
        e[j] = longint'(in_re[j]) * in_re[j] + longint'(in_im[j]) * in_im[j];
      end
      exp_p.push_back(e); exp_b.push_back(t % 64); exp_v.push_back(int'(in_valid));
      if (t >= 2) begin
        // output now reflects the input of two clocks earlier
        #1;
        checks++;
        if (out_valid != exp_v[0] || int'(out_bin) != exp_b[0]) begin
          failures++; $display("valid/bin mismatch t=%0d", t);
        end
        for (int j = 0; j < M; j++) begin
          checks++;
          if (longint'(out_power[j]) != exp_p[0][j]) begin
            failures++;
            if (failures < 10) $display("t=%0d lane %0d got %0d exp %0d", t, j, out_power[j], exp_p[0][j]);
          end
        end
        void'(exp_p.pop_front()); void'(exp_b.pop_front()); void'(exp_v.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
