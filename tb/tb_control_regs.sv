// tb_control_regs: checks the reset values (stopped, Blackman, 8000 spectra,
// gain 0), each command register's effect and read-back, the 64-bit time
// load strobe, the custom-window upload with auto-incrementing address, and
// the sticky ADC overflow / LED that a status write clears.
module tb_control_regs;
  import octad_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [3:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0, rdata, num_spectra;
  logic run, time_load, cw_we, ovr_led;
  win_sel_e win_sel;
  logic [5:0] gain_shift;
  logic [63:0] time_value;
  logic [$clog2(N)-1:0] cw_addr;
  logic [COEF_BITS-1:0] cw_data;
  logic adc_ovr = 0, buf_overrun = 0, acc_overrun = 0;
  int checks = 0, failures = 0;

  control_regs #(.N_FFT(N), .DEFAULT_NUM_SPECTRA(8000)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic wr(reg_addr_e a, logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  int writes_seen = 0;
  int cw_log_a [$], cw_log_d [$];
  always @(posedge clk) if (rst_n && cw_we) begin cw_log_a.push_back(int'(cw_addr)); cw_log_d.push_back(int'(cw_data)); end
  int loads = 0;
  longint load_val;
  always @(posedge clk) if (rst_n && time_load) begin loads++; load_val = time_value; end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("run reset", run, 0);
    chk("win reset", win_sel, WIN_BLACKMAN);
    chk("len reset", num_spectra, 8000);
    chk("gain reset", gain_shift, 0);
    wr(REG_CTRL, 1);          chk("run", run, 1);
    wr(REG_WINDOW, 1);        chk("win", win_sel, WIN_HANNING);
    wr(REG_ACC_LEN, 480);     chk("len", num_spectra, 480);
    wr(REG_GAIN, 13);         chk("gain", gain_shift, 13);
    rd_addr = REG_ACC_LEN; #1 chk("rd len", rdata, 480);
    rd_addr = REG_GAIN;    #1 chk("rd gain", rdata, 13);
    rd_addr = REG_CTRL;    #1 chk("rd run", rdata, 1);
    wr(REG_TIME_LO, 32'h89AB_CDEF);
    chk("no load yet", loads, 0);
    wr(REG_TIME_HI, 32'h0123_4567);
    @(negedge clk);
    chk("one load", loads, 1);
    chk("load value hi", load_val >> 32, 32'h0123_4567);
    chk("load value lo", load_val & 64'hFFFF_FFFF, 32'h89AB_CDEF);
    wr(REG_CWIN_ADR, 10);
    for (int i = 0; i < 5; i++) wr(REG_CWIN_DAT, 1000 + i);
    @(negedge clk);
    chk("cw writes", cw_log_a.size(), 5);
    for (int i = 0; i < 5; i++) begin
      chk("cw addr", cw_log_a[i], 10 + i);
      chk("cw data", cw_log_d[i], 1000 + i);
    end
    chk("led off", ovr_led, 0);
    @(negedge clk) adc_ovr = 1;
    @(negedge clk) adc_ovr = 0;
    repeat (3) @(negedge clk);
    chk("led sticky", ovr_led, 1);
    acc_overrun = 1;
    rd_addr = REG_STATUS; #1 chk("status", rdata, 5);
    wr(REG_STATUS, 0);
    chk("led cleared", ovr_led, 0);
    wr(REG_CTRL, 0);          chk("stop", run, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
