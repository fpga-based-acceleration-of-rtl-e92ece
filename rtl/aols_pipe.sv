// aols_pipe: one area-efficient overlap-save filter pipeline with power
// output (an "AOLS-NFT-P" structure) after its data-fetch multiplier.
//
//   products -> channel FIFO -> FFT/IFFT engine -> channel FIFO
//            -> bit-reverse (+ overlap discard) -> switch / power / store
//
// In launch 1 (MODE_FFT) the engine runs forward and the natural-order
// spectra of the input chunks are stored as the intermediate array; in
// launch 2 (MODE_IFFT) the engine runs as inverse FFT, the first K-1 points
// of every chunk are dropped and the power of the rest is stored.
//
// The FFT engine has no back-pressure of its own: it is stalled as a whole
// (clock enable) whenever the FIFO behind it is full, and it takes a word
// from the FIFO in front of it on every enabled clock where one is there.
// All links are valid/ready; one word of P points per clock in steady state.
//
// The chain of blocks and the FIFOs between them follow the original AOLS
// structure; the global-stall scheme around the engine is this design's
// own choice.
module aols_pipe
  import fp32_pkg::*;
  import ftc_pkg::*;
#(
  parameter int NFT   = NFT_DEF,
  parameter int P     = NPC_DEF,
  parameter int K     = K_DEF,
  parameter int FDEPTH = 16     // channel FIFO depth in words
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  mode_e                mode,
  input  logic [31:0]          n_points,
  input  logic [31:0]          n_chunks,
  input  logic [AW-1:0]        dst_base,
  output logic                 finished,
  output logic                 stall,      // FFT engine stalled this clock
  output logic                 dropped,    // store dropped a word past the end
  input  logic                 in_valid,
  output logic                 in_ready,
  input  cplx_t [P-1:0]        in_data,
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output logic [AW-1:0]        wr_addr,
  output logic [P*64-1:0]      wr_data,
  output logic [2*P-1:0]       wr_strb
);
  localparam int CNTW = $clog2(FDEPTH) + 1;

  logic          f1_valid, f2_in_ready, en, fft_valid;
  logic          f2_valid, br_in_ready, br_valid, st_ready;
  logic [P*64-1:0] f1_data, f2_data;
  cplx_t [P-1:0] fft_data, br_data;
  logic [CNTW-1:0] f1_cnt_unused, f2_cnt_unused;

  chan_fifo #(.W(P*64), .DEPTH(FDEPTH)) u_ch_in (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_data),
    .out_valid(f1_valid), .out_ready(en), .out_data(f1_data),
    .count(f1_cnt_unused)
  );

  assign en    = f2_in_ready;
  assign stall = !en;

  fft_engine #(.N(NFT), .P(P)) u_fft (
    .clk, .rst_n, .en,
    .inv(mode == MODE_IFFT),
    .in_valid(f1_valid), .in_data(f1_data),
    .out_valid(fft_valid), .out_data(fft_data)
  );

  chan_fifo #(.W(P*64), .DEPTH(FDEPTH)) u_ch_out (
    .clk, .rst_n,
    .in_valid(fft_valid && en), .in_ready(f2_in_ready), .in_data(fft_data),
    .out_valid(f2_valid), .out_ready(br_in_ready), .out_data(f2_data),
    .count(f2_cnt_unused)
  );

  bit_reverse #(.N(NFT), .P(P), .K(K)) u_brev (
    .clk, .rst_n,
    .discard(mode == MODE_IFFT),
    .in_valid(f2_valid), .in_ready(br_in_ready), .in_data(f2_data),
    .out_valid(br_valid), .out_ready(st_ready), .out_data(br_data)
  );

  result_store #(.NFT(NFT), .P(P), .K(K)) u_store (
    .clk, .rst_n, .start, .mode, .n_points, .n_chunks, .dst_base, .finished, .dropped,
    .in_valid(br_valid), .in_ready(st_ready), .in_data(br_data),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb
  );

endmodule
