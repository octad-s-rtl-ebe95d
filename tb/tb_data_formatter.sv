// tb_data_formatter: sends dumps with known header fields and a spectrum
// stream, applies random back-pressure, and checks every packet word: the
// twelve header words (sync, channel count, timestamp, sequence number,
// spectrum count, flags with the ADC overflow seen since the last packet,
// gain), then the payload, with sop on the first and eop on the last word.
module tb_data_formatter;
  import octad_pkg::*;
  localparam int NC = 8;
  logic clk = 0, rst_n = 0, dump = 0, adc_ovr = 0, buf_overrun = 0, acc_overrun = 0;
  logic [63:0] time_now = 0;
  logic [31:0] dump_spectra = 0, seq_num;
  logic [5:0] gain_shift = 0;
  win_sel_e win_sel = WIN_BLACKMAN;
  logic spec_valid = 0, spec_ready, spec_last = 0, out_valid, out_ready = 1, out_sop, out_eop;
  logic [15:0] spec_data = 0, out_data;
  int checks = 0, failures = 0;

  data_formatter #(.N_CHAN(NC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_w [$];
  int nw = 0, pkts = 0;
  always @(negedge clk) out_ready = ($urandom % 4 != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_w.size() == 0) begin failures++; $display("extra word"); end
    else begin
      if (int'(out_data) != exp_w[0]) begin
        failures++;
        if (failures < 10) $display("word %0d got %h exp %h", nw, out_data, exp_w[0]);
      end
      void'(exp_w.pop_front());
    end
    checks++;
    if (out_sop != (nw == 0) || out_eop != (nw == HDR_WORDS + NC - 1)) begin
      failures++; $display("sop/eop at word %0d", nw);
    end
    nw = (nw == HDR_WORDS + NC - 1) ? 0 : nw + 1;
    if (out_eop) pkts++;
  end

  // spectrum source: valid/ready, payload value = 1000*packet + channel
  task automatic send_spec(int p);
    for (int c = 0; c < NC; c++) begin
      @(negedge clk);
      spec_valid = 1; spec_data = 16'(1000 * p + c); spec_last = (c == NC - 1);
      @(posedge clk);
      while (!spec_ready) @(posedge clk);
    end
    @(negedge clk) spec_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 4; p++) begin
      bit ovr_in;
      ovr_in = (p == 1);
      repeat (5) @(negedge clk);
      if (ovr_in) begin adc_ovr = 1; @(negedge clk); adc_ovr = 0; end
      repeat (3) @(negedge clk);
      time_now = 64'h0123_4567_89AB_CDEF + p;
      dump_spectra = 8000 + p;
      gain_shift = 6'(p + 10);
      acc_overrun = (p == 3);
      exp_w.push_back(32'h4F53); exp_w.push_back(NC);
      exp_w.push_back(32'h0123); exp_w.push_back(32'h4567); exp_w.push_back(32'h89AB);
      exp_w.push_back(32'hCDEF + p);
      exp_w.push_back(0); exp_w.push_back(p);
      exp_w.push_back(0); exp_w.push_back(8000 + p);
      exp_w.push_back({11'd0, WIN_BLACKMAN, acc_overrun, 1'b0, ovr_in});
      exp_w.push_back(p + 10);
      for (int c = 0; c < NC; c++) exp_w.push_back(1000 * p + c);
      dump = 1;
      @(negedge clk) dump = 0;
      send_spec(p);
      wait (pkts == p + 1);
    end
    checks++;
    if (exp_w.size() != 0 || seq_num != 4) begin failures++; $display("left %0d seq %0d", exp_w.size(), seq_num); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
