// window_unit: window function multiplier in front of the FFT cores.
// Every sample of a frame is multiplied by a coefficient w[n] chosen by the
// sample's position n in the frame. Four windows can be selected: none
// (w = 1), Hanning, Blackman, and a custom table that is written through the
// command port. Because the frame buffer feeds all FFT lanes in lock step,
// one coefficient per clock serves all lanes; only the multipliers are
// replicated.
// Tables (periodic forms, n = 0..N_FFT-1, 1.0 = 2**16, rounded):
//   Hanning  w[n] = 0.5 - 0.5 cos(2 pi n / N)
//   Blackman w[n] = 0.42 - 0.5 cos(2 pi n / N) + 0.08 cos(4 pi n / N)
// They are computed at elaboration time, so no data file is needed.
// Output: out = (sample * w[n]) >>> (SAMPLE_BITS + 16 - OUT_BITS), i.e. a
// full-scale 10-bit sample maps onto the full 16-bit FFT input range.
// The selection is sampled at n = 0, so a change never splits a frame.
// Interface: in_valid/in_index/in_samples from the frame buffer, win_sel,
// custom-table write port cw_we/cw_addr/cw_data; out_valid/out_index/
// out_data[lane] to the FFT cores. Latency: two clocks.
// The four window options and the Blackman choice are the paper's; the
// coefficient format, output scaling, and frame-aligned switching are this
// design's choices. The custom table is undefined until it is written, and
// its coefficients must not exceed 1.0 (65536), or the 16-bit output wraps.
module window_unit
  import octad_pkg::*;
#(
  parameter int unsigned N_FFT       = 4096,
  parameter int unsigned NUM_FFT     = 16,
  parameter int unsigned SAMPLE_BITS = 10,
  parameter int unsigned OUT_BITS    = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [$clog2(N_FFT)-1:0]      in_index,
  input  logic signed [SAMPLE_BITS-1:0] in_samples [NUM_FFT],
  input  win_sel_e                      win_sel,
  input  logic                          cw_we,
  input  logic [$clog2(N_FFT)-1:0]      cw_addr,
  input  logic [COEF_BITS-1:0]          cw_data,
  output logic                          out_valid,
  output logic [$clog2(N_FFT)-1:0]      out_index,
  output logic signed [OUT_BITS-1:0]    out_data [NUM_FFT]
);
  localparam int unsigned IW    = $clog2(N_FFT);
  localparam int unsigned SHIFT = SAMPLE_BITS + 16 - OUT_BITS;
  localparam int unsigned PW    = SAMPLE_BITS + COEF_BITS + 1;
  localparam real         TWO_PI = 6.283185307179586;

  function automatic logic [COEF_BITS-1:0] to_coef(real w);
    real v;
    v = w * real'(COEF_ONE) + 0.5;
    if (v < 0.0) v = 0.0;
    return COEF_BITS'($rtoi(v));
  endfunction

  function automatic logic [COEF_BITS-1:0] hann(int n);
    return to_coef(0.5 - 0.5 * $cos(TWO_PI * n / N_FFT));
  endfunction

  function automatic logic [COEF_BITS-1:0] blackman(int n);
    return to_coef(0.42 - 0.5 * $cos(TWO_PI * n / N_FFT) + 0.08 * $cos(2.0 * TWO_PI * n / N_FFT));
  endfunction

  logic [COEF_BITS-1:0] hann_rom  [N_FFT];
  logic [COEF_BITS-1:0] black_rom [N_FFT];
  logic [COEF_BITS-1:0] cust_ram  [N_FFT];

  for (genvar n = 0; n < N_FFT; n++) begin : g_rom
    localparam logic [COEF_BITS-1:0] H = hann(n);
    localparam logic [COEF_BITS-1:0] B = blackman(n);
    assign hann_rom[n]  = H;
    assign black_rom[n] = B;
  end

  always_ff @(posedge clk) begin
    if (cw_we) cust_ram[cw_addr] <= cw_data;
  end

  // frame-aligned window selection
  win_sel_e sel_q, sel_cur;
  assign sel_cur = (in_valid && in_index == '0) ? win_sel : sel_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_q <= WIN_NONE;
    else        sel_q <= sel_cur;
  end

  // stage 1: table reads, sample delay
  logic [COEF_BITS-1:0]          c_h, c_b, c_c;
  win_sel_e                      sel1;
  logic                          v1;
  logic [IW-1:0]                 idx1;
  logic signed [SAMPLE_BITS-1:0] s1 [NUM_FFT];

  always_ff @(posedge clk) begin
    c_h <= hann_rom[in_index];
    c_b <= black_rom[in_index];
    c_c <= cust_ram[in_index];
    s1  <= in_samples;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1   <= 1'b0;
      idx1 <= '0;
      sel1 <= WIN_NONE;
    end else begin
      v1   <= in_valid;
      idx1 <= in_index;
      sel1 <= sel_cur;
    end
  end

  logic [COEF_BITS-1:0] coef;
  always_comb begin
    unique case (sel1)
      WIN_NONE:     coef = COEF_BITS'(COEF_ONE);
      WIN_HANNING:  coef = c_h;
      WIN_BLACKMAN: coef = c_b;
      default:      coef = c_c;
    endcase
  end

  // stage 2: multiply and scale
  logic signed [PW-1:0] prod [NUM_FFT];
  logic signed [PW-1:0] coef_s;
  assign coef_s = PW'(coef);   // zero-extended, always positive
  always_comb begin
    for (int j = 0; j < NUM_FFT; j++)
      prod[j] = {{(PW-SAMPLE_BITS){s1[j][SAMPLE_BITS-1]}}, s1[j]} * coef_s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_index <= '0;
      for (int j = 0; j < NUM_FFT; j++) out_data[j] <= '0;
    end else begin
      out_valid <= v1;
      out_index <= idx1;
      for (int j = 0; j < NUM_FFT; j++) out_data[j] <= prod[j][SHIFT +: OUT_BITS];
    end
  end
endmodule
