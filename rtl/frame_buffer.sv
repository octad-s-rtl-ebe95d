// frame_buffer: buffer memory in front of the parallel FFT cores.
// A single FFT core accepts one sample per clock, while the ADC delivers
// SAMPLES_PER_CLK samples per clock, so NUM_FFT (>= SAMPLES_PER_CLK) cores
// run side by side. The buffer cuts the incoming stream into frames of N_FFT
// consecutive samples; a group of NUM_FFT consecutive frames is written into
// one bank, frame j into lane j. The other bank is read meanwhile, all lanes in
// lock step: at read step n every lane gets sample n of its frame. Lanes
// therefore start, and later leave the FFT, at the same time, which lets one
// window table and one accumulator serve all lanes. Two banks (ping-pong) make
// the stream gap-free: a group is read while the next one is written.
// Memory layout: per lane and bank N_FFT/SAMPLES_PER_CLK words, each holding
// one clock's block of samples (wide write, sample-select on read).
// Interface: in_valid/in_samples (time order); out_valid, out_index (sample
// number within the frame), out_samples[lane]. overrun is sticky and is set
// when a bank is written while it still holds an unread group (data loss).
// Timing: a group is released after its last block is written; the read side
// has two register stages; a group needs N_FFT read clocks against
// NUM_FFT*N_FFT/SAMPLES_PER_CLK write clocks.
// The paper states only that a buffer before the FFT prevents data loss and
// that several FFT cores run in parallel; the lock-step group organisation
// is this design's choice.
module frame_buffer #(
  parameter int unsigned N_FFT           = 4096,
  parameter int unsigned SAMPLES_PER_CLK = 16,
  parameter int unsigned NUM_FFT         = 16,
  parameter int unsigned SAMPLE_BITS     = 10
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [SAMPLE_BITS-1:0] in_samples [SAMPLES_PER_CLK],
  output logic                          out_valid,
  output logic [$clog2(N_FFT)-1:0]      out_index,
  output logic signed [SAMPLE_BITS-1:0] out_samples [NUM_FFT],
  output logic                          overrun
);
  localparam int unsigned WORDS = N_FFT / SAMPLES_PER_CLK;
  localparam int unsigned WW    = $clog2(WORDS);
  localparam int unsigned LW    = (NUM_FFT > 1) ? $clog2(NUM_FFT) : 1;
  localparam int unsigned SW    = $clog2(SAMPLES_PER_CLK);
  localparam int unsigned IW    = $clog2(N_FFT);

  initial begin
    assert (NUM_FFT >= SAMPLES_PER_CLK)
      else $error("NUM_FFT lanes cannot keep up with SAMPLES_PER_CLK");
    assert (N_FFT % SAMPLES_PER_CLK == 0 && SAMPLES_PER_CLK >= 2 && WORDS >= 2)
      else $error("bad frame_buffer sizes");
  end

  typedef logic [SAMPLES_PER_CLK-1:0][SAMPLE_BITS-1:0] block_t;

  block_t mem [NUM_FFT][2*WORDS];

  // ---------------- write side ----------------
  logic [WW-1:0] wr_word;
  logic [LW-1:0] wr_lane;
  logic          wr_bank;
  logic [1:0]    full;
  logic          rd_done;    // read side finished its bank this clock
  logic          rd_bank;
  logic          wr_last;
  block_t        in_block;

  always_comb begin
    for (int s = 0; s < SAMPLES_PER_CLK; s++) in_block[s] = in_samples[s];
  end

  assign wr_last = in_valid && (wr_word == WW'(WORDS-1)) && (wr_lane == LW'(NUM_FFT-1));

  always_ff @(posedge clk) begin
    if (in_valid) mem[wr_lane][{wr_bank, wr_word}] <= in_block;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_word <= '0;
      wr_lane <= '0;
      wr_bank <= 1'b0;
      overrun <= 1'b0;
    end else if (in_valid) begin
      if (wr_word == '0 && wr_lane == '0 && full[wr_bank]) overrun <= 1'b1;
      wr_word <= wr_word + 1'b1;
      if (wr_word == WW'(WORDS-1)) begin
        if (wr_lane == LW'(NUM_FFT-1)) begin
          wr_lane <= '0;
          wr_bank <= ~wr_bank;
        end else begin
          wr_lane <= wr_lane + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) full <= '0;
    else begin
      for (int b = 0; b < 2; b++) begin
        if (wr_last && wr_bank == 1'(b))      full[b] <= 1'b1;
        else if (rd_done && rd_bank == 1'(b)) full[b] <= 1'b0;
      end
    end
  end

  // ---------------- read side ----------------
  logic          reading;
  logic [IW-1:0] rd_idx;
  logic          rd_en;

  assign rd_en   = reading || full[rd_bank];
  assign rd_done = rd_en && (rd_idx == IW'(N_FFT-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reading <= 1'b0;
      rd_idx  <= '0;
      rd_bank <= 1'b0;
    end else if (rd_en) begin
      rd_idx <= rd_idx + 1'b1;
      if (rd_done) begin
        reading <= 1'b0;
        rd_bank <= ~rd_bank;
      end else begin
        reading <= 1'b1;
      end
    end
  end

  // stage 1: wide word read; stage 2: sample select
  block_t        rd_word [NUM_FFT];
  logic          v1;
  logic [IW-1:0] idx1;

  always_ff @(posedge clk) begin
    for (int j = 0; j < NUM_FFT; j++)
      rd_word[j] <= mem[j][{rd_bank, rd_idx[IW-1:SW]}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      idx1      <= '0;
      out_valid <= 1'b0;
      out_index <= '0;
      for (int j = 0; j < NUM_FFT; j++) out_samples[j] <= '0;
    end else begin
      v1        <= rd_en;
      idx1      <= rd_idx;
      out_valid <= v1;
      out_index <= idx1;
      if (v1)
        for (int j = 0; j < NUM_FFT; j++) out_samples[j] <= rd_word[j][idx1[SW-1:0]];
    end
  end
endmodule
