// accumulator: integrates the power spectra of all FFT lanes.
// The NUM_FFT lanes leave the FFT in lock step, so at each clock they present
// the same bin. An adder tree sums the lanes; the sum is added into a 45-bit
// word per channel (read-modify-write) for the first N_CHAN bins (the positive
// frequencies of the real input). The memory has two banks: when the set
// number of spectra has been integrated, the bank is closed, `dump` pulses
// and integration continues in the other bank with the next group, so there
// is no dead time. The closed bank is read through rd_en/rd_addr/rd_data
// (one clock latency) while the other bank integrates. The first group of an
// integration writes instead of adding, so no clearing pass is needed.
// Control: integration starts at the first group boundary with run = 1 and
// takes its length, num_spectra (counted in spectra, rounded up to whole
// groups of NUM_FFT), at that moment. Clearing run lets the running
// integration finish and then stops. overrun is sticky and is set when a
// bank closes while the reader is still busy with the previous one: that
// older bank is about to be integrated into again, so its dump is lost.
// Timing: the bank is complete, and dump pulses, three clocks after the last
// channel of the last group enters; up to one read-modify-write per clock.
// The paper gives the accumulator, its 45-bit width (40 bit for the 2G64K
// variant) and the accumulation count; banking, start/stop alignment and the
// overrun flag are this design's choices.
module accumulator #(
  parameter int unsigned N_FFT      = 4096,
  parameter int unsigned NUM_FFT    = 16,
  parameter int unsigned POWER_BITS = 32,
  parameter int unsigned ACC_BITS   = 45,
  parameter int unsigned N_CHAN     = 2048
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [$clog2(N_FFT)-1:0]   in_bin,
  input  logic [POWER_BITS-1:0]      in_power [NUM_FFT],
  input  logic                       run,
  input  logic [31:0]                num_spectra,
  input  logic                       reader_busy,
  output logic                       dump,
  output logic [31:0]                dump_spectra,
  output logic                       active,
  input  logic                       rd_en,
  input  logic [$clog2(N_CHAN)-1:0]  rd_addr,
  output logic [ACC_BITS-1:0]        rd_data,
  output logic                       overrun
);
  localparam int unsigned IW = $clog2(N_FFT);
  localparam int unsigned CW = $clog2(N_CHAN);
  localparam int unsigned SW = POWER_BITS + $clog2(NUM_FFT);

  initial begin
    assert (N_CHAN <= N_FFT && SW <= ACC_BITS) else $error("bad accumulator sizes");
  end

  logic [ACC_BITS-1:0] mem [2*N_CHAN];

  // ---------------- control at the input ----------------
  logic        first, bank, rd_bank;
  logic [31:0] cnt, len_q;
  logic        start_now, act_eff, en_in, last_in, done_in;
  logic [31:0] cnt_next, len_eff;

  assign start_now = in_valid && in_bin == '0 && !active && run;
  assign act_eff   = active || start_now;
  assign en_in     = in_valid && act_eff && (in_bin < IW'(N_CHAN));
  assign last_in   = en_in && in_bin == IW'(N_CHAN-1);
  assign len_eff   = start_now ? ((num_spectra < NUM_FFT) ? NUM_FFT : num_spectra) : len_q;
  assign cnt_next  = (start_now ? 32'd0 : cnt) + NUM_FFT;
  assign done_in   = last_in && cnt_next >= len_eff;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      first   <= 1'b0;
      bank    <= 1'b0;
      cnt     <= '0;
      len_q   <= 32'(NUM_FFT);
      overrun <= 1'b0;
    end else begin
      if (start_now) begin
        active <= 1'b1;
        first  <= 1'b1;
        cnt    <= '0;
        len_q  <= len_eff;
      end
      if (last_in) begin
        first <= 1'b0;
        cnt   <= cnt_next;
        if (done_in) begin
          if (reader_busy) overrun <= 1'b1;
          active <= 1'b0;
          bank   <= ~bank;
        end
      end
    end
  end

  // ---------------- stage A: lane sum ----------------
  logic [SW-1:0] lane_sum;
  always_comb begin
    lane_sum = '0;
    for (int j = 0; j < NUM_FFT; j++) lane_sum = lane_sum + SW'(in_power[j]);
  end

  logic                a_v, a_first, a_bank, a_done;
  logic [CW-1:0]       a_ch;
  logic [SW-1:0]       a_sum;
  logic [31:0]         a_cnt;
  logic                b_v, b_first, b_bank, b_done;
  logic [CW-1:0]       b_ch;
  logic [SW-1:0]       b_sum;
  logic [31:0]         b_cnt;
  logic [ACC_BITS-1:0] b_old;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_v <= 1'b0; a_first <= 1'b0; a_bank <= 1'b0; a_done <= 1'b0;
      a_ch <= '0; a_sum <= '0; a_cnt <= '0;
      b_v <= 1'b0; b_first <= 1'b0; b_bank <= 1'b0; b_done <= 1'b0;
      b_ch <= '0; b_sum <= '0; b_cnt <= '0;
      dump <= 1'b0; dump_spectra <= '0; rd_bank <= 1'b1;
    end else begin
      // stage A
      a_v     <= en_in;
      a_first <= start_now ? 1'b1 : first;
      a_bank  <= bank;
      a_done  <= done_in;
      a_ch    <= in_bin[CW-1:0];
      a_sum   <= lane_sum;
      a_cnt   <= cnt_next;
      // stage B (memory read in parallel, below)
      b_v     <= a_v;
      b_first <= a_first;
      b_bank  <= a_bank;
      b_done  <= a_v && a_done;
      b_ch    <= a_ch;
      b_sum   <= a_sum;
      b_cnt   <= a_cnt;
      // stage C: write back, close the bank
      dump    <= b_v && b_done;
      if (b_v && b_done) begin
        dump_spectra <= b_cnt;
        rd_bank      <= b_bank;
      end
    end
  end

  always_ff @(posedge clk) begin
    b_old <= mem[{a_bank, a_ch}];
    if (b_v) mem[{b_bank, b_ch}] <= b_first ? ACC_BITS'(b_sum) : b_old + ACC_BITS'(b_sum);
    if (rd_en) rd_data <= mem[{rd_bank, rd_addr}];
  end
endmodule
