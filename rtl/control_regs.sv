// control_regs: command registers of the spectrometer.
// The instrument is commanded over the network (start/stop, window function,
// accumulation time, FFT gain, custom window upload); the network server
// turns those commands into writes on this simple port: wr_en with a word
// address (octad_pkg::reg_addr_e) and 32-bit data, and reads with rd_addr/
// rdata (combinational). Writing REG_CWIN_DAT forwards one coefficient to the
// window unit's custom table at REG_CWIN_ADR and then increments that address,
// so a whole window is uploaded as one address write and N_FFT data writes.
// Writing REG_TIME_HI loads {REG_TIME_HI, REG_TIME_LO} into the timestamp.
// The status register collects the ADC overflow bit (the front-panel
// overflow LED) until any write to REG_STATUS clears it; it also shows the
// sticky buffer and accumulator overrun flags.
// Reset values: stopped, Blackman window (the one used in the paper's
// measurements), DEFAULT_NUM_SPECTRA spectra per dump (8000 = 8 ms for the
// 4G4K instrument), gain 0.
// The set of commands follows the paper; addresses, encodings and reset
// values other than the 8000 spectra and Blackman are this design's.
module control_regs
  import octad_pkg::*;
#(
  parameter int unsigned N_FFT               = 4096,
  parameter int unsigned DEFAULT_NUM_SPECTRA = 8000
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [3:0]               wr_addr,
  input  logic [31:0]              wr_data,
  input  logic [3:0]               rd_addr,
  output logic [31:0]              rdata,
  output logic                     run,
  output win_sel_e                 win_sel,
  output logic [31:0]              num_spectra,
  output logic [5:0]               gain_shift,
  output logic                     time_load,
  output logic [63:0]              time_value,
  output logic                     cw_we,
  output logic [$clog2(N_FFT)-1:0] cw_addr,
  output logic [COEF_BITS-1:0]     cw_data,
  input  logic                     adc_ovr,
  input  logic                     buf_overrun,
  input  logic                     acc_overrun,
  output logic                     ovr_led
);
  localparam int unsigned IW = $clog2(N_FFT);

  logic [31:0] time_lo;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run         <= 1'b0;
      win_sel     <= WIN_BLACKMAN;
      num_spectra <= 32'(DEFAULT_NUM_SPECTRA);
      gain_shift  <= '0;
      time_lo     <= '0;
      time_load   <= 1'b0;
      time_value  <= '0;
      cw_we       <= 1'b0;
      cw_addr     <= '0;
      cw_data     <= '0;
      ovr_led     <= 1'b0;
    end else begin
      time_load <= 1'b0;
      if (cw_we) cw_addr <= cw_addr + 1'b1;
      cw_we     <= 1'b0;
      if (adc_ovr) ovr_led <= 1'b1;
      if (wr_en) begin
        unique case (wr_addr)
          REG_CTRL:     run         <= wr_data[0];
          REG_WINDOW:   win_sel     <= win_sel_e'(wr_data[1:0]);
          REG_ACC_LEN:  num_spectra <= wr_data;
          REG_GAIN:     gain_shift  <= wr_data[5:0];
          REG_TIME_LO:  time_lo     <= wr_data;
          REG_TIME_HI: begin
            time_value <= {wr_data, time_lo};
            time_load  <= 1'b1;
          end
          REG_CWIN_ADR: cw_addr <= wr_data[IW-1:0];
          REG_CWIN_DAT: begin
            cw_data <= wr_data[COEF_BITS-1:0];
            cw_we   <= 1'b1;
          end
          REG_STATUS:   ovr_led <= adc_ovr;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (rd_addr)
      REG_CTRL:     rdata = {31'd0, run};
      REG_WINDOW:   rdata = {30'd0, win_sel};
      REG_ACC_LEN:  rdata = num_spectra;
      REG_GAIN:     rdata = {26'd0, gain_shift};
      REG_TIME_LO:  rdata = time_lo;
      REG_TIME_HI:  rdata = time_value[63:32];
      REG_CWIN_ADR: rdata = 32'(cw_addr);
      REG_CWIN_DAT: rdata = 32'(cw_data);
      REG_STATUS:   rdata = {29'd0, acc_overrun, buf_overrun, ovr_led};
      default:      rdata = '0;
    endcase
  end
endmodule
