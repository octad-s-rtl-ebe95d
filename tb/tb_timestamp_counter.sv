// tb_timestamp_counter: checks that the time advances by one per clock from
// reset, that a load takes effect on the next clock, and that counting
// continues from the loaded value (including the carry into the upper word).
module tb_timestamp_counter;
  logic clk = 0, rst_n = 0, load = 0;
  logic [63:0] load_value = 0, time_now;
  int checks = 0, failures = 0;

  timestamp_counter #(.TS_BITS(64)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned e;
  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (time_now != 0) failures++;
    rst_n = 1;
    e = 0;
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      e++;
      checks++;
      if (time_now != e) begin failures++; $display("t=%0d got %0d", i, time_now); end
    end
    load_value = 64'h0000_0123_FFFF_FFF0; load = 1;
    @(negedge clk) load = 0;
    e = 64'h0000_0123_FFFF_FFF0;
    checks++;
    if (time_now != e) begin failures++; $display("load got %h", time_now); end
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      e++;
      checks++;
      if (time_now != e) begin failures++; $display("after load %0d got %h", i, time_now); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
