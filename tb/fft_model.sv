// fft_model: behavioural stand-in for the parallel streaming FFT cores
// (testbench only, not synthesizable). It collects each lane's real input
// frame (one sample per clock, lanes in lock step, index 0..N-1), computes
// an N-point radix-2 FFT in floating point once the frame is complete, and
// streams the bins out in natural order, one bin per clock on every lane,
// LAT clocks after the frame ended. Output scaling: X[k] / 2**SHIFT, rounded
// and clipped to OUT_BITS signed. Frames that arrive back to back leave back
// to back, so the model keeps the no-dead-time property of the real cores.
module fft_model #(
  parameter int N        = 64,
  parameter int M        = 4,
  parameter int IN_BITS  = 16,
  parameter int OUT_BITS = 16,
  parameter int SHIFT    = 4,
  parameter int LAT      = 7
) (
  input  logic                       clk,
  input  logic                       in_valid,
  input  logic [$clog2(N)-1:0]       in_index,
  input  logic signed [IN_BITS-1:0]  in_data [M],
  output logic                       out_valid,
  output logic [$clog2(N)-1:0]       out_bin,
  output logic signed [OUT_BITS-1:0] out_re [M],
  output logic signed [OUT_BITS-1:0] out_im [M]
);
  localparam int  LOGN = $clog2(N);
  localparam real PI2  = 6.283185307179586;

  real   fr [M][N];
  real   xr [N], xi [N];
  real   cw [N/2], sw [N/2];
  int    q_re [$], q_im [$];
  longint q_rdy [$];
  longint cyc = 0;
  int    optr = 0;
  int    frames_done = 0;

  initial begin
    for (int k = 0; k < N / 2; k++) begin
      cw[k] = $cos(PI2 * k / N);
      sw[k] = -$sin(PI2 * k / N);
    end
    out_valid = 0;
    out_bin   = '0;
    for (int j = 0; j < M; j++) begin out_re[j] = '0; out_im[j] = '0; end
  end

  function automatic int rev(int v);
    int r = 0;
    for (int b = 0; b < LOGN; b++) if ((v & (1 << b)) != 0) r |= 1 << (LOGN - 1 - b);
    return r;
  endfunction

  function automatic int quant(real v);
    real s;
    longint q;
    longint lim;
    s = v / real'(longint'(1) << SHIFT);
    q = (s >= 0.0) ? longint'($floor(s + 0.5)) : -longint'($floor(-s + 0.5));
    lim = (longint'(1) << (OUT_BITS - 1)) - 1;
    if (q > lim) q = lim;
    if (q < -lim - 1) q = -lim - 1;
    return int'(q);
  endfunction

  task automatic do_fft();
    for (int i = 0; i < N; i++) begin
      int r = rev(i);
      if (r > i) begin
        real t;
        t = xr[i]; xr[i] = xr[r]; xr[r] = t;
        t = xi[i]; xi[i] = xi[r]; xi[r] = t;
      end
    end
    for (int len = 2; len <= N; len *= 2) begin
      int half = len / 2;
      int step = N / len;
      for (int s = 0; s < N; s += len)
        for (int k = 0; k < half; k++) begin
          real wr, wi, ur, ui, vr, vi;
          wr = cw[k * step]; wi = sw[k * step];
          ur = xr[s + k]; ui = xi[s + k];
          vr = xr[s + k + half] * wr - xi[s + k + half] * wi;
          vi = xr[s + k + half] * wi + xi[s + k + half] * wr;
          xr[s + k] = ur + vr;        xi[s + k] = ui + vi;
          xr[s + k + half] = ur - vr; xi[s + k + half] = ui - vi;
        end
    end
  endtask

  int res_re [M][N], res_im [M][N];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid) begin
      for (int j = 0; j < M; j++) fr[j][in_index] = real'(in_data[j]);
      if (int'(in_index) == N - 1) begin
        for (int j = 0; j < M; j++) begin
          for (int i = 0; i < N; i++) begin xr[i] = fr[j][i]; xi[i] = 0.0; end
          do_fft();
          for (int i = 0; i < N; i++) begin res_re[j][i] = quant(xr[i]); res_im[j][i] = quant(xi[i]); end
        end
        for (int i = 0; i < N; i++)
          for (int j = 0; j < M; j++) begin q_re.push_back(res_re[j][i]); q_im.push_back(res_im[j][i]); end
        q_rdy.push_back(cyc + LAT);
        frames_done++;
      end
    end
    // output engine
    if (optr > 0 || (q_rdy.size() > 0 && cyc >= q_rdy[0])) begin
      if (optr == 0) void'(q_rdy.pop_front());
      out_valid <= 1'b1;
      out_bin   <= optr[LOGN-1:0];
      for (int j = 0; j < M; j++) begin
        out_re[j] <= OUT_BITS'(q_re.pop_front());
        out_im[j] <= OUT_BITS'(q_im.pop_front());
      end
      optr = (optr == N - 1) ? 0 : optr + 1;
    end else begin
      out_valid <= 1'b0;
    end
  end
endmodule
