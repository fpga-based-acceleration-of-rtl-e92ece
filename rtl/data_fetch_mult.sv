// data_fetch_mult: data-fetch and element-wise multiplication kernel of the
// AOLS structure, shared by R filter pipelines.
//
// Launch 1 (mode = MODE_FFT): the input array of n_points complex points is
// cut into n_chunks overlap-save chunks of NFT points; chunk c starts at input
// point c*(NFT-K+1) - (K-1), so successive chunks overlap by K-1 points and
// the first chunk begins with K-1 zeros. Each chunk is multiplied point by
// point by the "initial array" read from coef_base[0], which the host fills
// with 1+j0 so that the multiplication leaves the data unchanged, and goes to
// pipeline 0 only.
// Launch 2 (mode = MODE_IFFT): chunk c of the intermediate array (the
// Fourier-transformed chunks in natural order, NFT points each, at src_base)
// is read once and multiplied by the NFT pre-processed coefficients of each of
// the R filters (coef_base[r]); pipeline r gets the product for filter r.
// Sharing one read of the intermediate data among the R pipelines is how
// three pipelines fit into 4x64 bits of input bandwidth per clock.
//
// Memory: one read port for the data and one per filter for coefficients
// (see fetch_port for the request/response protocol). Output: R valid/ready
// streams of P complex points per word, one word per clock when nothing
// stalls. `pad_word` marks each product of a zero-padding word. `busy` is high from `start` until the last word has been handed to
// the multipliers. The configuration inputs must stay stable while busy.
//
// The function (overlap-save chunking, zero padding, element-wise product
// with the initial array or the filter spectra) follows the original
// kernel; the address generator, the memory protocol and the lock-step
// advance of all pipelines are this design's own choices.
module data_fetch_mult
  import fp32_pkg::*;
  import ftc_pkg::*;
#(
  parameter int NFT   = NFT_DEF,
  parameter int P     = NPC_DEF,
  parameter int K     = K_DEF,
  parameter int R     = NREP_DEF,
  parameter int DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  mode_e                    mode,
  input  logic [31:0]              n_points,
  input  logic [31:0]              n_chunks,
  input  logic [AW-1:0]            src_base,
  input  logic [R-1:0][AW-1:0]     coef_base,
  output logic                     busy,
  output logic                     pad_word,   // a zero-padding word was multiplied
  // data read port
  output logic                     drd_req_valid,
  input  logic                     drd_req_ready,
  output logic [AW-1:0]            drd_req_addr,
  input  logic                     drd_resp_valid,
  input  logic [P*64-1:0]          drd_resp_data,
  // coefficient read ports
  output logic [R-1:0]             crd_req_valid,
  input  logic [R-1:0]             crd_req_ready,
  output logic [R-1:0][AW-1:0]     crd_req_addr,
  input  logic [R-1:0]             crd_resp_valid,
  input  logic [R-1:0][P*64-1:0]   crd_resp_data,
  // products to the R pipelines
  output logic [R-1:0]             out_valid,
  input  logic [R-1:0]             out_ready,
  output cplx_t [R-1:0][P-1:0]     out_data
);
  localparam int T = NFT / P;
  localparam int L = NFT - K + 1;   // new points per chunk

  logic [R-1:0] active;
  assign active = (mode == MODE_FFT) ? R'(1) : '1;

  logic        ff_busy;
  logic [R-1:0] cf_busy;
  logic        d_valid, d_zero, d_ready;
  cplx_t [P-1:0] d_data;
  logic [R-1:0] c_valid, c_zero_unused;
  cplx_t [R-1:0][P-1:0] c_data;
  logic [R-1:0] mul_in_ready;
  logic        fire;
  logic [31:0] left_q;   // words still to hand to the multipliers

  fetch_port #(.P(P), .DEPTH(DEPTH)) u_dport (
    .clk, .rst_n, .start,
    .base(src_base),
    .chunk_stride(mode == MODE_FFT ? 32'(L) : 32'(NFT)),
    .offset(mode == MODE_FFT ? -32'(K - 1) : 32'sd0),
    .check_range(mode == MODE_FFT),
    .n_points, .n_chunks, .words(32'(T)),
    .busy(ff_busy),
    .req_valid(drd_req_valid), .req_ready(drd_req_ready), .req_addr(drd_req_addr),
    .resp_valid(drd_resp_valid), .resp_data(drd_resp_data),
    .out_valid(d_valid), .out_ready(d_ready), .out_zero(d_zero), .out_data(d_data)
  );

  for (genvar r = 0; r < R; r++) begin : g_coef
    fetch_port #(.P(P), .DEPTH(DEPTH)) u_cport (
      .clk, .rst_n, .start(start && active[r]),
      .base(coef_base[r]), .chunk_stride(32'd0), .offset(32'sd0),
      .check_range(1'b0), .n_points, .n_chunks, .words(32'(T)),
      .busy(cf_busy[r]),
      .req_valid(crd_req_valid[r]), .req_ready(crd_req_ready[r]),
      .req_addr(crd_req_addr[r]),
      .resp_valid(crd_resp_valid[r]), .resp_data(crd_resp_data[r]),
      .out_valid(c_valid[r]), .out_ready(fire && active[r]),
      .out_zero(c_zero_unused[r]), .out_data(c_data[r])
    );

    cmul #(.P(P)) u_mul (
      .clk, .rst_n,
      .in_valid(fire && active[r]), .in_ready(mul_in_ready[r]),
      .in_a(d_data), .in_b(c_data[r]),
      .out_valid(out_valid[r]), .out_ready(out_ready[r]), .out_data(out_data[r])
    );
  end

  // all operands of the word present and every active pipeline able to take it
  assign fire    = d_valid && ((c_valid | ~active) == '1) && ((mul_in_ready | ~active) == '1)
                   && (left_q != 0);
  assign d_ready = fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left_q <= '0;
    end else if (start) begin
      left_q <= n_chunks * 32'(T);
    end else if (fire) begin
      left_q <= left_q - 1;
    end
  end

  assign busy     = (left_q != 0) || ff_busy || (cf_busy != '0);
  assign pad_word = fire && d_zero;

endmodule
