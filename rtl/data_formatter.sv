// data_formatter: turns every 16-bit spectrum into one output packet.
// On `dump` it captures the packet's header fields and sends HDR_WORDS
// header words, then forwards the N_CHAN spectrum words from the gain
// controller. Header (16-bit words, most significant part first):
//   0      sync word 0x4F53
//   1      number of channels
//   2..5   hardware timestamp (64 bit) at the end of the accumulation
//   6..7   packet sequence number (32 bit)
//   8..9   number of spectra accumulated (32 bit)
//   10     flags: [0] ADC overflow during this accumulation,
//                 [1] buffer overrun, [2] accumulator overrun,
//                 [4:3] window selection
//   11     FFT gain (lowest accumulator bit kept)
// The ADC overflow bit is collected (ORed) from clock to clock and cleared
// when it is captured into a header. A dump that arrives while a packet is
// still being sent is ignored.
// Interface: dump and header fields; spec_valid/spec_ready/spec_data/
// spec_last from the gain controller; out_valid/out_ready/out_data/out_sop/
// out_eop to the network interface (valid/ready, sop on the sync word,
// eop on the last channel).
// Timing: one word per clock while out_ready is high; the packet starts the
// clock after dump.
// The header with its timestamp and ADC overflow bit is the paper's; the
// word layout, sync word and other fields are this design's choices.
module data_formatter
  import octad_pkg::*;
#(
  parameter int unsigned N_CHAN = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        dump,
  input  logic [63:0] time_now,
  input  logic [31:0] dump_spectra,
  input  logic [5:0]  gain_shift,
  input  win_sel_e    win_sel,
  input  logic        buf_overrun,
  input  logic        acc_overrun,
  input  logic        adc_ovr,
  input  logic        spec_valid,
  output logic        spec_ready,
  input  logic [15:0] spec_data,
  input  logic        spec_last,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [15:0] out_data,
  output logic        out_sop,
  output logic        out_eop,
  output logic [31:0] seq_num
);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DATA} state_e;

  state_e      state;
  logic [3:0]  hidx;
  logic        ovr_acc;
  logic [15:0] hdr [HDR_WORDS];
  logic        take;

  assign take = (state == S_IDLE) && dump;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      hidx    <= '0;
      ovr_acc <= 1'b0;
      seq_num <= '0;
      for (int i = 0; i < HDR_WORDS; i++) hdr[i] <= '0;
    end else begin
      ovr_acc <= take ? adc_ovr : (ovr_acc | adc_ovr);
      unique case (state)
        S_IDLE: if (dump) begin
          hdr[0]  <= HDR_SYNC;
          hdr[1]  <= 16'(N_CHAN);
          hdr[2]  <= time_now[63:48];
          hdr[3]  <= time_now[47:32];
          hdr[4]  <= time_now[31:16];
          hdr[5]  <= time_now[15:0];
          hdr[6]  <= seq_num[31:16];
          hdr[7]  <= seq_num[15:0];
          hdr[8]  <= dump_spectra[31:16];
          hdr[9]  <= dump_spectra[15:0];
          hdr[10] <= {11'd0, win_sel, acc_overrun, buf_overrun, ovr_acc | adc_ovr};
          hdr[11] <= {10'd0, gain_shift};
          hidx    <= '0;
          state   <= S_HDR;
        end
        S_HDR: if (out_ready) begin
          if (hidx == 4'(HDR_WORDS-1)) state <= S_DATA;
          hidx <= hidx + 1'b1;
        end
        S_DATA: if (out_ready && spec_valid && spec_last) begin
          state   <= S_IDLE;
          seq_num <= seq_num + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    spec_ready = (state == S_DATA) && out_ready;
    out_sop    = (state == S_HDR) && hidx == '0;
    unique case (state)
      S_HDR: begin
        out_valid = 1'b1;
        out_data  = hdr[hidx];
        out_eop   = 1'b0;
      end
      S_DATA: begin
        out_valid = spec_valid;
        out_data  = spec_data;
        out_eop   = spec_valid && spec_last;
      end
      default: begin
        out_valid = 1'b0;
        out_data  = '0;
        out_eop   = 1'b0;
      end
    endcase
  end

  a_sop_eop: assert property (@(posedge clk) disable iff (!rst_n) !(out_sop && out_eop));
endmodule
