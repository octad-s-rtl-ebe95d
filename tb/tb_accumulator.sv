// tb_accumulator: feeds back-to-back groups of random lane powers (bins
// 0..N-1, no gaps) and keeps its own per-channel sums. On every dump it reads
// the closed bank while the next integration runs and compares all channels,
// the reported spectrum count (num_spectra rounded up to whole groups) and
// the dump latency (three clocks after the last channel). It also checks that
// clearing run stops integration after the running dump, that run restarts it
// at a group boundary, and that the overrun flag rises when integration
// re-enters a bank that the reader still claims.
module tb_accumulator;
  localparam int N = 16, NC = 8, M = 2, AW = 45;
  logic clk = 0, rst_n = 0, in_valid = 0, run = 0, reader_busy = 0, rd_en = 0;
  logic [$clog2(N)-1:0] in_bin = 0;
  logic [31:0] in_power [M];
  logic [31:0] num_spectra = 5;
  logic dump, active, overrun;
  logic [31:0] dump_spectra;
  logic [$clog2(NC)-1:0] rd_addr = 0;
  logic [AW-1:0] rd_data;
  int checks = 0, failures = 0;

  accumulator #(.N_FFT(N), .NUM_FFT(M), .POWER_BITS(32), .ACC_BITS(AW), .N_CHAN(NC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model
  longint sums [NC];
  longint snap [$][NC];
  int     snap_n [$];
  int     groups_in = 0, model_active = 0, model_len = 0;
  int     cyc = 0, last_ch_cycle = -100, dumps = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // driver: one bin per clock, forever
  int bin = 0;
  initial begin
    for (int j = 0; j < M; j++) in_power[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      in_valid = 1;
      in_bin = bin;
      if (bin == 0 && !model_active && run) begin
        model_active = 1;
        model_len = (num_spectra < M) ? M : num_spectra;
        groups_in = 0;
      end
      for (int j = 0; j < M; j++) in_power[j] = $urandom;
      if (model_active && bin < NC) begin
        longint s;
        s = 0;
        for (int j = 0; j < M; j++) s += longint'(in_power[j]);
        sums[bin] = (groups_in == 0) ? s : sums[bin] + s;
        if (bin == NC - 1) begin
          groups_in++;
          last_ch_cycle = cyc;
          if (groups_in * M >= model_len) begin
            snap.push_back(sums);
            snap_n.push_back(groups_in * M);
            model_active = 0;
          end
        end
      end
      bin = (bin + 1) % N;
    end
  end

  // reader: read the closed bank after each dump
  always @(posedge clk) if (rst_n && dump) begin
    dumps++;
    checks++;
    if (cyc - last_ch_cycle != 3) begin
      failures++; $display("dump latency %0d", cyc - last_ch_cycle);
    end
    checks++;
    if (snap.size() == 0) begin failures++; $display("unexpected dump"); end
    else if (int'(dump_spectra) != snap_n[0]) begin
      failures++; $display("dump_spectra %0d exp %0d", dump_spectra, snap_n[0]);
    end
    fork read_bank(); join_none
  end

  task automatic read_bank();
    longint e [NC];
    e = snap[0];
    for (int c = 0; c < NC; c++) begin
      @(negedge clk); rd_en = 1; rd_addr = c;
      @(negedge clk); rd_en = 0;
      checks++;
      if (longint'(rd_data) != e[c]) begin
        failures++;
        if (failures < 10) $display("ch %0d got %0d exp %0d", c, rd_data, e[c]);
      end
    end
    void'(snap.pop_front()); void'(snap_n.pop_front());
  endtask

  initial begin
    wait (rst_n);
    repeat (5) @(negedge clk);
    run = 1;                              // 5 -> 3 groups of 2
    wait (dumps == 3);
    num_spectra = 8;
    wait (dumps == 5);
    wait (active);
    run = 0;                              // the integration in progress finishes
    wait (dumps == 6);
    repeat (5 * N) @(posedge clk);
    checks++;
    if (dumps != 6 || active) begin failures++; $display("did not stop: dumps %0d", dumps); end
    checks++;
    if (overrun) begin failures++; $display("spurious overrun"); end
    // overrun: reader claims the bank that integration is about to re-enter
    num_spectra = 2;
    reader_busy = 1;
    @(negedge clk) run = 1;
    wait (dumps == 8);
    repeat (2 * N) @(posedge clk);
    checks++;
    if (!overrun) begin failures++; $display("overrun not flagged"); end
    repeat (2 * N) @(posedge clk);
    $display("dumps=%0d", dumps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
