// octad_s_top: signal processing of one OCTAD-S FPGA (4G4K configuration).
// Chain: ADC decode -> frame buffer -> window multiplier -> FFT cores
// (outside this module) -> power (|X|^2) -> accumulator -> gain controller
// -> data formatter -> network interface (outside this module).
// One clock drives everything. At the defaults the ADC delivers 16 samples
// per clock (4.096 GS/s at a 256 MHz clock), 16 FFT lanes of N_FFT = 4096
// points each take one sample per clock, and one spectrum of 2048 channels
// leaves per accumulation (8000 spectra = 8 ms by default).
// The FFT cores are vendor IP and are not part of this RTL: fft_in_* carries
// the windowed frames to them (all lanes in lock step, sample index
// fft_in_index, real input) and fft_out_* brings their natural-order output
// back (bin fft_out_bin, same bin on every lane). Any latency is allowed as
// long as the lanes stay aligned.
// The command port (cmd_*) is what a network command server would drive;
// the packet stream out_* goes to the network interface.
// The block chain is the paper's; clocking, lane counts and all interfaces
// are this design's choices.
module octad_s_top
  import octad_pkg::*;
#(
  parameter int unsigned N_FFT               = 4096,
  parameter int unsigned SAMPLES_PER_CLK     = 16,
  parameter int unsigned NUM_FFT             = 16,
  parameter int unsigned ADC_CORES           = 4,
  parameter int unsigned ADC_BITS            = 10,
  parameter int unsigned FFT_IN_BITS         = 16,
  parameter int unsigned FFT_OUT_BITS        = 16,
  parameter int unsigned POWER_BITS          = 32,
  parameter int unsigned ACC_BITS            = 45,
  parameter int unsigned N_CHAN              = N_FFT / 2,
  parameter int unsigned DEFAULT_NUM_SPECTRA = 8000
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // ADC
  input  logic                           adc_valid,
  input  logic [ADC_BITS-1:0]            adc_data [ADC_CORES][SAMPLES_PER_CLK/ADC_CORES],
  input  logic [ADC_CORES-1:0]           adc_ovr,
  // command port
  input  logic                           cmd_wr_en,
  input  logic [3:0]                     cmd_wr_addr,
  input  logic [31:0]                    cmd_wr_data,
  input  logic [3:0]                     cmd_rd_addr,
  output logic [31:0]                    cmd_rdata,
  // to the FFT cores
  output logic                           fft_in_valid,
  output logic [$clog2(N_FFT)-1:0]       fft_in_index,
  output logic signed [FFT_IN_BITS-1:0]  fft_in_data [NUM_FFT],
  // from the FFT cores
  input  logic                           fft_out_valid,
  input  logic [$clog2(N_FFT)-1:0]       fft_out_bin,
  input  logic signed [FFT_OUT_BITS-1:0] fft_out_re [NUM_FFT],
  input  logic signed [FFT_OUT_BITS-1:0] fft_out_im [NUM_FFT],
  // packets to the network interface
  output logic                           out_valid,
  input  logic                           out_ready,
  output logic [15:0]                    out_data,
  output logic                           out_sop,
  output logic                           out_eop,
  // front panel
  output logic                           ovr_led
);
  localparam int unsigned IW = $clog2(N_FFT);
  localparam int unsigned CW = $clog2(N_CHAN);

  // command registers
  logic                 run, time_load, cw_we;
  win_sel_e             win_sel;
  logic [31:0]          num_spectra;
  logic [5:0]           gain_shift;
  logic [63:0]          time_value, time_now;
  logic [IW-1:0]        cw_addr;
  logic [COEF_BITS-1:0] cw_data;
  logic                 buf_overrun, acc_overrun;

  // decode
  logic                       dec_valid, dec_ovr;
  logic signed [ADC_BITS-1:0] dec_samples [SAMPLES_PER_CLK];

  // buffer
  logic                       buf_valid;
  logic [IW-1:0]              buf_index;
  logic signed [ADC_BITS-1:0] buf_samples [NUM_FFT];

  // power / accumulator / gain / formatter
  logic                  pw_valid;
  logic [IW-1:0]         pw_bin;
  logic [POWER_BITS-1:0] pw_power [NUM_FFT];
  logic                  acc_dump, acc_active;
  logic [31:0]           acc_spectra;
  logic                  acc_rd_en;
  logic [CW-1:0]         acc_rd_addr;
  logic [ACC_BITS-1:0]   acc_rd_data;
  logic                  gc_valid, gc_ready, gc_last, gc_busy;
  logic [15:0]           gc_data;
  logic [31:0]           seq_num;

  control_regs #(.N_FFT(N_FFT), .DEFAULT_NUM_SPECTRA(DEFAULT_NUM_SPECTRA)) u_regs (
    .clk, .rst_n,
    .wr_en(cmd_wr_en), .wr_addr(cmd_wr_addr), .wr_data(cmd_wr_data),
    .rd_addr(cmd_rd_addr), .rdata(cmd_rdata),
    .run, .win_sel, .num_spectra, .gain_shift, .time_load, .time_value,
    .cw_we, .cw_addr, .cw_data,
    .adc_ovr(dec_ovr), .buf_overrun, .acc_overrun, .ovr_led
  );

  timestamp_counter #(.TS_BITS(64)) u_time (
    .clk, .rst_n, .load(time_load), .load_value(time_value), .time_now
  );

  adc_decode #(.ADC_CORES(ADC_CORES), .ADC_BITS(ADC_BITS), .SAMPLES_PER_CLK(SAMPLES_PER_CLK)) u_dec (
    .clk, .rst_n, .in_valid(adc_valid), .adc_data, .adc_ovr,
    .out_valid(dec_valid), .samples(dec_samples), .ovr(dec_ovr)
  );

  frame_buffer #(.N_FFT(N_FFT), .SAMPLES_PER_CLK(SAMPLES_PER_CLK), .NUM_FFT(NUM_FFT),
                 .SAMPLE_BITS(ADC_BITS)) u_buf (
    .clk, .rst_n, .in_valid(dec_valid), .in_samples(dec_samples),
    .out_valid(buf_valid), .out_index(buf_index), .out_samples(buf_samples),
    .overrun(buf_overrun)
  );

  window_unit #(.N_FFT(N_FFT), .NUM_FFT(NUM_FFT), .SAMPLE_BITS(ADC_BITS),
                .OUT_BITS(FFT_IN_BITS)) u_win (
    .clk, .rst_n, .in_valid(buf_valid), .in_index(buf_index), .in_samples(buf_samples),
    .win_sel, .cw_we, .cw_addr, .cw_data,
    .out_valid(fft_in_valid), .out_index(fft_in_index), .out_data(fft_in_data)
  );

  power_detector #(.N_FFT(N_FFT), .NUM_FFT(NUM_FFT), .FFT_BITS(FFT_OUT_BITS),
                   .POWER_BITS(POWER_BITS)) u_pow (
    .clk, .rst_n, .in_valid(fft_out_valid), .in_bin(fft_out_bin),
    .in_re(fft_out_re), .in_im(fft_out_im),
    .out_valid(pw_valid), .out_bin(pw_bin), .out_power(pw_power)
  );

  accumulator #(.N_FFT(N_FFT), .NUM_FFT(NUM_FFT), .POWER_BITS(POWER_BITS),
                .ACC_BITS(ACC_BITS), .N_CHAN(N_CHAN)) u_acc (
    .clk, .rst_n, .in_valid(pw_valid), .in_bin(pw_bin), .in_power(pw_power),
    .run, .num_spectra, .reader_busy(gc_busy),
    .dump(acc_dump), .dump_spectra(acc_spectra), .active(acc_active),
    .rd_en(acc_rd_en), .rd_addr(acc_rd_addr), .rd_data(acc_rd_data),
    .overrun(acc_overrun)
  );

  gain_controller #(.ACC_BITS(ACC_BITS), .OUT_BITS(16), .N_CHAN(N_CHAN)) u_gain (
    .clk, .rst_n, .start(acc_dump), .gain_shift,
    .rd_en(acc_rd_en), .rd_addr(acc_rd_addr), .rd_data(acc_rd_data),
    .out_valid(gc_valid), .out_ready(gc_ready), .out_data(gc_data), .out_last(gc_last),
    .busy(gc_busy)
  );

  data_formatter #(.N_CHAN(N_CHAN)) u_fmt (
    .clk, .rst_n, .dump(acc_dump), .time_now, .dump_spectra(acc_spectra),
    .gain_shift, .win_sel, .buf_overrun, .acc_overrun, .adc_ovr(dec_ovr),
    .spec_valid(gc_valid), .spec_ready(gc_ready), .spec_data(gc_data), .spec_last(gc_last),
    .out_valid, .out_ready, .out_data, .out_sop, .out_eop, .seq_num
  );
endmodule
