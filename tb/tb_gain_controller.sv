// tb_gain_controller: serves a model accumulator bank (one-clock read
// latency) and checks every emitted word against min(acc >> shift, 65535)
// for several FFT gains, under random back-pressure and with out_ready held
// high (then one word per clock: N_CHAN words within N_CHAN + 2 clocks of
// start). Also checks out_last and busy.
module tb_gain_controller;
  localparam int NC = 16, AW = 45;
  logic clk = 0, rst_n = 0, start = 0, out_ready = 0;
  logic [5:0] gain_shift = 0;
  logic rd_en, out_valid, out_last, busy;
  logic [$clog2(NC)-1:0] rd_addr;
  logic [AW-1:0] rd_data;
  logic [15:0] out_data;
  int checks = 0, failures = 0;

  gain_controller #(.ACC_BITS(AW), .OUT_BITS(16), .N_CHAN(NC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [AW-1:0] bank [NC];
  always @(posedge clk) if (rd_en) rd_data <= bank[rd_addr];

  int got = 0, cyc = 0, t0 = 0, t_last = 0;
  int shift_cur = 0;
  bit random_ready = 1;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) out_ready = random_ready ? ($urandom % 3 != 0) : 1'b1;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    longint e;
    e = longint'(bank[got]) >> shift_cur;
    if (e > 65535) e = 65535;
    checks++;
    if (longint'(out_data) != e) begin
      failures++;
      if (failures < 10) $display("ch %0d shift %0d got %0d exp %0d", got, shift_cur, out_data, e);
    end
    checks++;
    if (out_last != (got == NC - 1)) begin failures++; $display("last flag at %0d", got); end
    if (out_last) t_last = cyc;
    got++;
  end

  initial begin
    rd_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 8; r++) begin
      for (int c = 0; c < NC; c++) begin
        bank[c] = {$urandom, $urandom};
        bank[c] = bank[c] >> ($urandom % 40);
      end
      shift_cur = (r * 5) % 30;
      random_ready = (r != 3);
      got = 0;
      @(negedge clk);
      gain_shift = 6'(shift_cur); start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      gain_shift = 6'(shift_cur + 1);       // must not matter: sampled at start
      wait (!busy);
      @(posedge clk);
      checks++;
      if (got != NC) begin failures++; $display("words %0d", got); end
      if (r == 3) begin
        checks++;
        if (t_last - t0 > NC + 2) begin failures++; $display("throughput: %0d clocks", t_last - t0); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
