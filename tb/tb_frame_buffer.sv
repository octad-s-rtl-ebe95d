// tb_frame_buffer: feeds a numbered sample stream (value = f(global index))
// and checks that lane j of group g receives frame g*NUM_FFT + j in order,
// that index runs 0..N-1, that a continuous input gives a gap-free output
// once the first group is released (no dead time), the release latency, and
// that gaps in the input are tolerated without loss.
module tb_frame_buffer;
  localparam int N = 64, P = 4, M = 4, B = 10;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [B-1:0] in_samples [P];
  logic out_valid, overrun;
  logic [$clog2(N)-1:0] out_index;
  logic signed [B-1:0] out_samples [M];
  int checks = 0, failures = 0;

  frame_buffer #(.N_FFT(N), .SAMPLES_PER_CLK(P), .NUM_FFT(M), .SAMPLE_BITS(B)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic signed [B-1:0] val(int g);
    return B'(g * 37 + (g >> 5));
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, first_out = -1, gaps_after_start = 0, ngroups_out = 0;
  int rd_n = 0, rd_group = 0;
  bit continuous = 1;
  int last_in_cycle_group0 = -1, in_blocks = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // checker
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      if (first_out < 0) first_out = cyc;
      checks++;
      if (int'(out_index) != rd_n) begin
        failures++;
        $display("index %0d expected %0d", out_index, rd_n);
      end
      for (int j = 0; j < M; j++) begin
        checks++;
        if (out_samples[j] !== val((rd_group * M + j) * N + rd_n)) begin
          failures++;
          if (failures < 10) $display("group %0d lane %0d n %0d got %0d", rd_group, j, rd_n, out_samples[j]);
        end
      end
      rd_n++;
      if (rd_n == N) begin rd_n = 0; rd_group++; end
    end else if (first_out >= 0 && continuous) gaps_after_start++;
  end

  int g = 0;
  initial begin
    for (int s = 0; s < P; s++) in_samples[s] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: continuous input, 6 groups
    for (int t = 0; t < 6 * M * N / P; t++) begin
      @(negedge clk);
      in_valid = 1;
      for (int s = 0; s < P; s++) in_samples[s] = val(g + s);
      g += P;
      in_blocks++;
      if (in_blocks == M * N / P) last_in_cycle_group0 = cyc;
    end
    // latency of release: first output two clocks after the group is complete
    checks++;
    if (first_out - last_in_cycle_group0 != 3) begin
      failures++;
      $display("release latency %0d", first_out - last_in_cycle_group0);
    end
    // let the output drain in step with the input; then phase 2 with gaps
    continuous = 0;
    for (int t = 0; t < 4 * M * N / P; ) begin
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      if (in_valid) begin
        for (int s = 0; s < P; s++) in_samples[s] = val(g + s);
        g += P;
        t++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (3 * N) @(posedge clk);
    checks++;
    if (gaps_after_start != 0) begin
      failures++;
      $display("output gaps with continuous input: %0d", gaps_after_start);
    end
    checks++;
    if (rd_group != 10) begin
      failures++;
      $display("groups out %0d", rd_group);
    end
    checks++;
    if (overrun) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
