// chan_fifo: synchronous FIFO that models a kernel-to-kernel channel.
//
// In the original design the kernels are joined by FIFO channels, eight
// 32-bit channels side by side for a 4-point complex stream. Here one FIFO
// entry holds a whole word (W bits, e.g. P complex SPF points), which is
// equivalent because the channels of one link are always written and read
// together.
//
// Interface: valid/ready on both sides. A word is written on a clock edge
// with in_valid && in_ready and read with out_valid && out_ready. in_ready is
// low only when the FIFO is full; out_valid is high whenever it is not empty
// (first-word fall-through). `count` is the number of stored words. Depth is
// a power of two; the default of 16 words is this design's choice (the
// channel depth is not given).
module chan_fifo #(
  parameter int W     = 256,  // word width in bits
  parameter int DEPTH = 16    // entries, power of two
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [W-1:0]               out_data,
  output logic [$clog2(DEPTH):0]     count
);
  localparam int AWD = $clog2(DEPTH);

  logic [W-1:0]   mem_q [DEPTH];
  logic [AWD:0]   wp_q, rp_q;
  logic           push, pop;

  assign count     = wp_q - rp_q;
  assign in_ready  = (count != (AWD + 1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem_q[rp_q[AWD-1:0]];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q <= '0;
      rp_q <= '0;
    end else begin
      if (push) wp_q <= wp_q + 1'b1;
      if (pop)  rp_q <= rp_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem_q[wp_q[AWD-1:0]] <= in_data;
  end

  a_count_range : assert property (@(posedge clk) disable iff (!rst_n)
    count <= (AWD + 1)'(DEPTH));

endmodule
