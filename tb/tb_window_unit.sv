// tb_window_unit: drives frames of random samples through all four window
// options (none, Hanning, Blackman, custom table written by the test) and
// compares every lane with floor(x * round(w[n] * 2**16) / 2**10), the window
// computed here from its textbook formula. Also checks the two-clock latency
// and that a selection change in mid-frame takes effect at the next frame.
module tb_window_unit;
  import octad_pkg::*;
  localparam int N = 64, M = 3, B = 10;
  localparam real PI2 = 2.0 * 3.141592653589793;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [$clog2(N)-1:0] in_index = 0, cw_addr = 0, out_index;
  logic signed [B-1:0] in_samples [M];
  win_sel_e win_sel = WIN_NONE;
  logic cw_we = 0;
  logic [COEF_BITS-1:0] cw_data = 0;
  logic out_valid;
  logic signed [15:0] out_data [M];
  int checks = 0, failures = 0;

  window_unit #(.N_FFT(N), .NUM_FFT(M), .SAMPLE_BITS(B), .OUT_BITS(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cust [N];
  function automatic int coef(int sel, int n);
    real w;
    case (sel)
      0: return 65536;
      1: w = 0.5 * (1.0 - $cos(PI2 * n / N));
      2: w = 0.42 - 0.5 * $cos(PI2 * n / N) + 0.08 * $cos(2.0 * PI2 * n / N);
      default: return cust[n];
    endcase
    w = w * 65536.0;
    if (w < 0.0) w = 0.0;
    return int'($floor(w + 0.5));
  endfunction

  // expected values travel in a queue with their sample timing
  typedef struct { int n; int v [M]; } exp_t;
  exp_t q [$];
  int frame_sel;
  int x;

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = q.pop_front();
      if (int'(out_index) != e.n) begin failures++; $display("index"); end
      for (int j = 0; j < M; j++) begin
        checks++;
        if (int'(out_data[j]) != e.v[j]) begin
          failures++;
          if (failures < 10) $display("n=%0d lane %0d got %0d exp %0d", e.n, j, out_data[j], e.v[j]);
        end
      end
    end
  end

  int lat_start, lat_seen;
  initial begin
    for (int j = 0; j < M; j++) in_samples[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // upload a custom window (a triangle)
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      cust[n] = (n < N / 2) ? n * 2048 : (N - n) * 2048;
      cw_we = 1; cw_addr = n; cw_data = COEF_BITS'(cust[n]);
    end
    @(negedge clk) cw_we = 0;
    for (int f = 0; f < 12; f++) begin
      int sel_req;
      sel_req = f % 4;
      for (int n = 0; n < N; n++) begin
        exp_t e;
        @(negedge clk);
        // request the new window in mid-frame: it applies from the next frame
        if (n == N / 2) win_sel = win_sel_e'(sel_req);
        if (n == 0) frame_sel = int'(win_sel);
        in_valid = 1; in_index = n;
        e.n = n;
        for (int j = 0; j < M; j++) begin
          x = $signed(B'($urandom));
          if (f == 1 && n == 10) x = -512;
          in_samples[j] = x;
          e.v[j] = (x * coef(frame_sel, n)) >>> 10;
        end
        q.push_back(e);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("missing outputs %0d", q.size()); end
    // latency
    @(negedge clk) begin in_valid = 1; in_index = 0; end
    lat_start = $time;
    @(negedge clk) in_valid = 0;
    begin exp_t e; e.n = 0; for (int j = 0; j < M; j++) e.v[j] = (int'(in_samples[j]) * coef(int'(win_sel), 0)) >>> 10; q.push_back(e); end
    wait (out_valid);
    lat_seen = ($time - lat_start + 5) / 10;
    checks++;
    if (lat_seen != 2) begin failures++; $display("latency %0d", lat_seen); end
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
