// gain_controller: cuts the 16-bit output word out of each 45-bit channel.
// On `start` (the accumulator's dump pulse) it reads the closed bank channel
// by channel and emits value = acc >> gain_shift, the user's "FFT gain". A
// channel whose bits above the kept field are not all zero is clipped to the
// largest output value instead of wrapping. gain_shift is sampled at start.
// Interface: start, gain_shift; rd_en/rd_addr/rd_data to the accumulator
// (one clock read latency); a valid/ready stream out_valid/out_ready/
// out_data/out_last (last = final channel); busy is high from start until the
// last channel has been handed over.
// Timing: a two-entry output queue keeps one channel per clock flowing while
// out_ready stays high; the first word appears two clocks after start.
// The 16-bit field and its user-set position follow the paper; clipping and
// the stream handshake are this design's choices.
module gain_controller #(
  parameter int unsigned ACC_BITS = 45,
  parameter int unsigned OUT_BITS = 16,
  parameter int unsigned N_CHAN   = 2048
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [5:0]                gain_shift,
  output logic                      rd_en,
  output logic [$clog2(N_CHAN)-1:0] rd_addr,
  input  logic [ACC_BITS-1:0]       rd_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [OUT_BITS-1:0]       out_data,
  output logic                      out_last,
  output logic                      busy
);
  localparam int unsigned CW = $clog2(N_CHAN);

  logic          issuing;     // channels left to read
  logic [5:0]    shift_q;
  logic          infl, infl_last;
  logic [1:0]    count;
  logic [OUT_BITS:0] q [2];   // {last, data}
  logic          pop, push;
  logic [OUT_BITS-1:0] extracted;
  logic [ACC_BITS-1:0] shifted;

  assign pop   = out_valid && out_ready;
  assign push  = infl;
  assign rd_en = issuing && ((32'(count) + 32'(infl) - 32'(pop)) < 2);

  always_comb begin
    shifted   = rd_data >> shift_q;
    extracted = (|(shifted >> OUT_BITS)) ? '1 : shifted[OUT_BITS-1:0];
  end

  assign out_valid = count != 0;
  assign out_data  = q[0][OUT_BITS-1:0];
  assign out_last  = q[0][OUT_BITS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing   <= 1'b0;
      rd_addr   <= '0;
      shift_q   <= '0;
      infl      <= 1'b0;
      infl_last <= 1'b0;
      count     <= '0;
      q[0]      <= '0;
      q[1]      <= '0;
      busy      <= 1'b0;
    end else begin
      if (start && !busy) begin
        issuing <= 1'b1;
        busy    <= 1'b1;
        rd_addr <= '0;
        shift_q <= gain_shift;
      end else if (rd_en) begin
        rd_addr <= rd_addr + 1'b1;
        if (rd_addr == CW'(N_CHAN-1)) issuing <= 1'b0;
      end
      infl      <= rd_en;
      infl_last <= rd_en && rd_addr == CW'(N_CHAN-1);
      // two-entry queue
      unique case ({push, pop})
        2'b10: begin
          q[count[0]] <= {infl_last, extracted};
          count       <= count + 1'b1;
        end
        2'b01: begin
          q[0]  <= q[1];
          count <= count - 1'b1;
        end
        2'b11: begin
          if (count == 2'd1) q[0] <= {infl_last, extracted};
          else begin
            q[0] <= q[1];
            q[1] <= {infl_last, extracted};
          end
        end
        default: ;
      endcase
      if (pop && out_last) busy <= 1'b0;
    end
  end

  a_queue: assert property (@(posedge clk) disable iff (!rst_n) count <= 2)
    else $error("gain_controller queue overflow");
endmodule
