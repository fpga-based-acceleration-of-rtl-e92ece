// result_store: the output "switch" of one AOLS-P pipeline and its
// global-memory write address generator.
//
// Launch 1 (MODE_FFT): the natural-order Fourier-transformed chunks coming
// from the bit-reverse block are stored as complex points (re, im float
// pairs) into the intermediate array: chunk c, word w goes to float address
// dst_base + 2*(c*NFT + w*P). All NFT/P words of each chunk are stored.
// Launch 2 (MODE_IFFT): the bit-reverse block has already dropped the K-1
// overlap points, so each chunk brings NFT-K+1 valid output points. Their
// spectral power is computed (power_calc) and stored as one float per point:
// chunk c, word w goes to dst_base + c*(NFT-K+1) + w*P. Words past the end of
// the n_points-long output (tail of the last chunk) are dropped.
//
// Interface: valid/ready input stream; write port wr_valid/wr_ready with a
// float address, P*64 data bits and one strobe per float (power words use
// the low P floats). `finished` goes high once every word of the launch has
// been stored or dropped, and is cleared by `start`.
//
// The routing (intermediate array in launch 1, power array in launch 2)
// follows the original switch; the address layout, the dropping of the
// tail and the write protocol are this design's own choices.
module result_store
  import fp32_pkg::*;
  import ftc_pkg::*;
#(
  parameter int NFT = NFT_DEF,
  parameter int P   = NPC_DEF,
  parameter int K   = K_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  mode_e                mode,
  input  logic [31:0]          n_points,
  input  logic [31:0]          n_chunks,
  input  logic [AW-1:0]        dst_base,
  output logic                 finished,
  output logic                 dropped,   // a word past the end was dropped
  input  logic                 in_valid,
  output logic                 in_ready,
  input  cplx_t [P-1:0]        in_data,
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output logic [AW-1:0]        wr_addr,
  output logic [P*64-1:0]      wr_data,
  output logic [2*P-1:0]       wr_strb
);
  localparam int T    = NFT / P;
  localparam int L    = NFT - K + 1;
  localparam int SKIP = (K - 1) / P;

  logic        pw;
  assign pw = (mode == MODE_IFFT);

  // power path
  logic pin_valid, pin_ready, pout_valid, pout_ready;
  logic [P-1:0][31:0] pout;
  assign pin_valid = in_valid && pw;

  power_calc #(.P(P)) u_pow (
    .clk, .rst_n,
    .in_valid(pin_valid), .in_ready(pin_ready), .in_data,
    .out_valid(pout_valid), .out_ready(pout_ready), .out_pow(pout)
  );

  // word position within the launch
  logic [31:0] c_q, w_q, left_q, pt_chunk_q;
  logic [31:0] wpc, pt;
  logic        s_valid, drop, take;

  assign wpc     = pw ? 32'(T - SKIP) : 32'(T);
  assign pt      = pt_chunk_q + w_q * P;               // first point of this word
  assign s_valid = pw ? pout_valid : in_valid;
  assign drop    = pw && (pt >= n_points);
  assign wr_valid = s_valid && !drop && (left_q != 0);
  assign take    = s_valid && (left_q != 0) && (drop || wr_ready);
  assign in_ready   = pw ? pin_ready : (wr_ready && left_q != 0);
  assign pout_ready = take;
  assign dropped    = take && drop;

  assign wr_addr = pw ? dst_base + AW'(pt)
                      : dst_base + AW'(2 * (c_q * NFT + w_q * P));
  always_comb begin
    wr_data = '0;
    if (pw) begin
      wr_data[P*32-1:0] = pout;
      wr_strb = {P'(0), {P{1'b1}}};
    end else begin
      wr_data = in_data;
      wr_strb = '1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q        <= '0;
      w_q        <= '0;
      pt_chunk_q <= '0;
      left_q     <= '0;
      finished   <= 1'b0;
    end else if (start) begin
      c_q        <= '0;
      w_q        <= '0;
      pt_chunk_q <= '0;
      left_q     <= n_chunks * wpc;
      finished   <= (n_chunks == 0);
    end else if (take) begin
      left_q <= left_q - 1;
      if (left_q == 1) finished <= 1'b1;
      if (w_q == wpc - 1) begin
        w_q        <= '0;
        c_q        <= c_q + 1;
        pt_chunk_q <= pt_chunk_q + 32'(L);
      end else begin
        w_q <= w_q + 1;
      end
    end
  end

  // In complex mode the word goes straight to the write port.
  a_no_bypass_loss : assert property (@(posedge clk) disable iff (!rst_n)
    (!pw && in_valid && in_ready) |-> (wr_valid && wr_ready));

endmodule
