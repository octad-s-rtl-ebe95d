// tb_octad_s_top: end-to-end test of the spectrometer datapath at reduced
// size (64-point FFT, 4 samples per clock, 4 lanes, 32 channels, 16 spectra
// per dump). A tone plus pseudo-random noise is sent through the ADC ports,
// the FFT cores are replaced by a floating-point model (fft_model), and the
// output packets are checked word by word against sums the testbench forms
// itself from the FFT outputs it observes.
// Checked: every windowed FFT input sample against x * w[n] computed here
// (for all four windows, the custom one uploaded through the command port);
// every packet's header (sync, channel count, timestamp, sequence number,
// spectrum count, flags, gain) and payload (min(sum >> gain, 65535));
// timestamps of consecutive packets differ by exactly the accumulation
// length in clocks (no dead time). Mechanisms made to happen and counted:
// window switches, output back-pressure stalls, clipping in the gain
// controller, ADC overflow reported in a header, stop and restart, a time
// load, and a change of accumulation length; any that never happens counts
// as a failure.
module tb_octad_s_top;
  import octad_pkg::*;
  localparam int  N      = 64;
  localparam int  P      = 4;
  localparam int  M      = 4;
  localparam int  NC     = N / 2;
  localparam int  C      = 4;
  localparam int  SPEC0  = 16;            // spectra per dump at start
  localparam int  NPKT   = 14;            // packets to check
  localparam bit  FULL   = 0;             // 1: full-size run, fewer scenarios
  localparam int  WATCH  = 400000;        // watchdog in clocks
  localparam int  LOGN   = $clog2(N);
  localparam real PI2    = 6.283185307179586;

  logic clk = 0, rst_n = 0;
  logic adc_valid = 0;
  logic [9:0] adc_data [C][P/C];
  logic [C-1:0] adc_ovr = '0;
  logic cmd_wr_en = 0;
  logic [3:0] cmd_wr_addr = 0, cmd_rd_addr = REG_STATUS;
  logic [31:0] cmd_wr_data = 0, cmd_rdata;
  logic fft_in_valid, fft_out_valid;
  logic [LOGN-1:0] fft_in_index, fft_out_bin;
  logic signed [15:0] fft_in_data [M], fft_out_re [M], fft_out_im [M];
  logic out_valid, out_ready = 1, out_sop, out_eop, ovr_led;
  logic [15:0] out_data;

  octad_s_top #(.N_FFT(N), .SAMPLES_PER_CLK(P), .NUM_FFT(M), .DEFAULT_NUM_SPECTRA(SPEC0)) dut (.*);

  fft_model #(.N(N), .M(M), .IN_BITS(16), .OUT_BITS(16), .SHIFT(LOGN - 2), .LAT(9)) u_fft (
    .clk, .in_valid(fft_in_valid), .in_index(fft_in_index), .in_data(fft_in_data),
    .out_valid(fft_out_valid), .out_bin(fft_out_bin), .out_re(fft_out_re), .out_im(fft_out_im)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (WATCH) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("[%0d] %s", cyc, msg);
  endtask

  // ---------------- stimulus: tone + noise ----------------
  function automatic int sval(longint g);
    longint unsigned h;
    real t;
    int v;
    h = (longint'(g) + 1) * 64'h9E3779B97F4A7C15;
    h = h ^ (h >> 29);
    t = 200.0 * $sin(PI2 * (real'(N) / 8.0 + 0.3) * real'(g) / real'(N)) + real'(int'(h % 41) - 20);
    v = int'($floor(t + 0.5));
    if (v > 511) v = 511;
    if (v < -512) v = -512;
    return v;
  endfunction

  longint g_adc = 0;
  bit force_ovr = 0;
  always @(negedge clk) if (rst_n) begin
    adc_valid <= 1'b1;
    for (int k = 0; k < P / C; k++)
      for (int c = 0; c < C; c++)
        adc_data[c][k] <= 10'(sval(g_adc + k * C + c) + 512);
    adc_ovr <= force_ovr ? 4'b0100 : 4'b0000;
    g_adc <= g_adc + P;
  end

  // ---------------- windows, as computed here ----------------
  int wtab [4][N];
  initial begin
    for (int n = 0; n < N; n++) begin
      real h, b;
      h = 0.5 - 0.5 * $cos(PI2 * n / N);
      b = 0.42 - 0.5 * $cos(PI2 * n / N) + 0.08 * $cos(2.0 * PI2 * n / N);
      wtab[0][n] = 65536;
      wtab[1][n] = int'($floor(h * 65536.0 + 0.5));
      wtab[2][n] = (b < 0.0) ? 0 : int'($floor(b * 65536.0 + 0.5));
      wtab[3][n] = (n * 7919) % 65537;         // custom: arbitrary pattern
    end
  end

  // ---------------- command port ----------------
  task automatic cmd(reg_addr_e a, logic [31:0] d);
    @(negedge clk); cmd_wr_en = 1; cmd_wr_addr = a; cmd_wr_data = d;
    @(negedge clk); cmd_wr_en = 0;
  endtask

  // reference copies of the settings, changed only away from frame edges
  int ref_win = WIN_BLACKMAN;
  int ref_run = 0;
  int ref_len = SPEC0;
  int ref_gain = 0;

  // ---------------- check windowed FFT input ----------------
  longint grp_in = 0;
  int frame_win = WIN_BLACKMAN;
  int wins_seen [4];
  int win_switches = 0;
  always @(posedge clk) if (rst_n && fft_in_valid) begin
    if (fft_in_index == 0) begin
      if (ref_win != frame_win) win_switches++;
      frame_win = ref_win;
      wins_seen[frame_win]++;
    end
    for (int j = 0; j < M; j++) begin
      longint g;
      int e;
      g = (grp_in * M + j) * N + longint'(fft_in_index);
      e = (sval(g) * wtab[frame_win][fft_in_index]) >>> 10;
      checks++;
      if (int'(fft_in_data[j]) != e)
        fail($sformatf("window: group %0d lane %0d n %0d got %0d exp %0d", grp_in, j, fft_in_index, fft_in_data[j], e));
    end
    if (int'(fft_in_index) == N - 1) grp_in++;
  end

  // ---------------- reference accumulator from the FFT outputs ----------------
  longint gsum [NC];
  longint acc [NC];
  longint exp_pkt [$][NC];
  int     exp_cnt [$];
  int     m_active = 0, m_groups = 0, m_len = 0;
  always @(posedge clk) if (rst_n && fft_out_valid && int'(fft_out_bin) < NC) begin
    longint s;
    s = 0;
    for (int j = 0; j < M; j++) s += longint'(fft_out_re[j]) * fft_out_re[j] + longint'(fft_out_im[j]) * fft_out_im[j];
    if (fft_out_bin == 0 && !m_active && ref_run != 0) begin
      m_active = 1; m_groups = 0; m_len = (ref_len < M) ? M : ref_len;
    end
    if (m_active) begin
      acc[fft_out_bin] = (m_groups == 0) ? s : acc[fft_out_bin] + s;
      if (int'(fft_out_bin) == NC - 1) begin
        m_groups++;
        if (m_groups * M >= m_len) begin
          exp_pkt.push_back(acc);
          exp_cnt.push_back(m_groups * M);
          m_active = 0;
        end
      end
    end
  end

  // ---------------- packet checker ----------------
  int   pkts = 0, widx = 0, stalls = 0, clipped = 0, ovr_pkts = 0;
  int   hdr [HDR_WORDS];
  longint last_ts = -1;
  int   last_cnt = 0;
  bit   ts_contiguous_expected = 0;
  int   contiguous_ok = 0;
  longint ts_loaded = -1;
  int   ts_load_seen = 0;
  always @(negedge clk) out_ready = ($urandom % 4) != 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) stalls++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_sop != (widx == 0)) fail($sformatf("sop at word %0d", widx));
      if (out_eop != (widx == HDR_WORDS + NC - 1)) fail($sformatf("eop at word %0d", widx));
      if (widx < HDR_WORDS) begin
        hdr[widx] = int'(out_data);
        if (widx == HDR_WORDS - 1) check_header();
      end else begin
        longint e;
        int ch;
        ch = widx - HDR_WORDS;
        e = (exp_pkt.size() > 0) ? (exp_pkt[0][ch] >> hdr[11]) : -1;
        if (e > 65535) begin e = 65535; clipped++; end
        checks++;
        if (longint'(out_data) != e)
          fail($sformatf("packet %0d ch %0d got %0d exp %0d", pkts, ch, out_data, e));
      end
      if (widx == HDR_WORDS + NC - 1) begin
        widx = 0;
        pkts++;
        if (exp_pkt.size() > 0) begin void'(exp_pkt.pop_front()); void'(exp_cnt.pop_front()); end
      end else widx++;
    end
  end

  task automatic check_header();
    longint ts;
    int cnt;
    ts  = {hdr[2][15:0], hdr[3][15:0], hdr[4][15:0], hdr[5][15:0]};
    cnt = {hdr[8][15:0], hdr[9][15:0]};
    checks += 6;
    if (hdr[0] != 32'h4F53) fail("sync word");
    if (hdr[1] != NC) fail("channel count");
    if ({hdr[6][15:0], hdr[7][15:0]} != pkts) fail($sformatf("sequence %0d", {hdr[6][15:0], hdr[7][15:0]}));
    if (exp_cnt.size() == 0 || cnt != exp_cnt[0]) fail($sformatf("spectrum count %0d", cnt));
    if (hdr[11] != ref_gain) fail($sformatf("gain field %0d exp %0d", hdr[11], ref_gain));
    if (hdr[10][4:3] != 2'(ref_win) && win_switches == 0) fail("window field");
    if (hdr[10][0]) ovr_pkts++;
    if (hdr[10][2:1] != 0) fail("overrun flagged");
    // consecutive integrations: timestamps differ by the integration length
    if (ts_loaded >= 0 && ts_load_seen == 0) begin
      checks++;
      if (ts < ts_loaded || ts - ts_loaded > 64'd1 << 24) fail("timestamp after load");
      ts_load_seen = 1;
    end else if (ts_contiguous_expected && last_ts >= 0) begin
      checks++;
      if (ts - last_ts != longint'(cnt / M) * N) fail($sformatf("dump spacing %0d, exp %0d", ts - last_ts, (cnt / M) * N));
      else contiguous_ok++;
    end
    ts_contiguous_expected = 1;
    last_ts = ts;
    last_cnt = cnt;
  endtask

  // ---------------- scenario ----------------
  task automatic wait_mid_frame();
    // settings change only in mid-frame so no frame edge is ambiguous
    do @(negedge clk); while (!(fft_in_valid && int'(fft_in_index) == N / 2 && fft_out_valid && int'(fft_out_bin) > NC / 4 && int'(fft_out_bin) < N - 8));
  endtask

  int stops = 0, len_changes = 0, time_loads = 0;
  initial begin
    for (int c = 0; c < C; c++) for (int k = 0; k < P / C; k++) adc_data[c][k] = 10'd512;
    repeat (4) @(posedge clk);
    rst_n = 1;
    cmd(REG_GAIN, FULL ? 26 : 13);
    ref_gain = FULL ? 26 : 13;
    cmd(REG_CTRL, 1);
    ref_run = 1;
    if (!FULL) begin
      // custom window upload
      cmd(REG_CWIN_ADR, 0);
      for (int n = 0; n < N; n++) cmd(REG_CWIN_DAT, wtab[3][n]);
      wait (pkts == 2);
      wait_mid_frame(); cmd(REG_WINDOW, WIN_HANNING); ref_win = WIN_HANNING;
      force_ovr = 1; @(negedge clk); force_ovr = 0;
      wait (pkts == 4);
      @(negedge clk) cmd(REG_GAIN, 11); ref_gain = 11;  // just after a header
      wait_mid_frame(); cmd(REG_WINDOW, WIN_CUSTOM); ref_win = WIN_CUSTOM;
      wait (pkts == 6);
      wait_mid_frame(); cmd(REG_WINDOW, WIN_NONE); ref_win = WIN_NONE;
      wait_mid_frame(); cmd(REG_ACC_LEN, 24); ref_len = 24; len_changes++;
      wait (pkts == 8);
      wait_mid_frame(); cmd(REG_CTRL, 0); ref_run = 0; stops++;
      wait (exp_pkt.size() == 0 && widx == 0 && m_active == 0);
      repeat (3 * N) @(negedge clk);
      cmd(REG_TIME_LO, 32'h0000_1000); cmd(REG_TIME_HI, 32'h0000_0007);
      ts_loaded = 64'h0000_0007_0000_1000; time_loads++;
      wait_mid_frame(); cmd(REG_CTRL, 1); ref_run = 1;
      ts_contiguous_expected = 0;
      wait_mid_frame(); cmd(REG_WINDOW, WIN_BLACKMAN); ref_win = WIN_BLACKMAN;
    end
    wait (pkts == NPKT);
    // mechanisms
    checks++;
    if (!FULL) begin
      checks += 7;
      if (win_switches < 4) fail($sformatf("window switches %0d", win_switches));
      if (wins_seen[0] == 0 || wins_seen[1] == 0 || wins_seen[2] == 0 || wins_seen[3] == 0) fail("not all windows used");
      if (ovr_pkts != 1) fail($sformatf("ADC overflow in %0d headers", ovr_pkts));
      if (stops == 0 || ts_load_seen == 0) fail("stop/restart or time load missing");
      if (len_changes == 0) fail("no length change");
      if (!ovr_led) fail("overflow LED not lit");
      if (time_loads == 0) fail("no time load");
    end
    if (stalls == 0) fail("no back-pressure stall");
    checks += 2;
    if (clipped == 0) fail("no clipping in gain controller");
    if (contiguous_ok == 0) fail("no back-to-back dumps checked");
    $display("packets=%0d window_switches=%0d stalls=%0d clipped=%0d ovr_headers=%0d stops=%0d contiguous=%0d",
             pkts, win_switches, stalls, clipped, ovr_pkts, stops, contiguous_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
