// aols_p_top: R parallel area-efficient overlap-save FIR filter pipelines
// with spectral-power output (default: three AOLS-2048-P pipelines with a
// 4-point FFT engine, K = 421 taps), sharing one data-fetch kernel.
//
// The host runs a filter bank in launches. Launch 1 (mode = MODE_FFT) cuts
// the n_points-long input at src_base into n_chunks overlapping chunks of NFT
// points (new points per chunk NFT-K+1, K-1 leading zeros) and stores their
// spectra as the intermediate array at dst_base[0] (pipeline 0 only; the
// multiplication uses a 1+j0 initial array at coef_base[0]). Every following
// launch (mode = MODE_IFFT) reads the intermediate array from src_base,
// multiplies it by the pre-processed coefficients of R filters (the filter's
// NFT-point FFT, scaled by 1/NFT, at coef_base[r]), inverse-transforms each
// product, discards the K-1 overlap points and writes the power of the
// n_points filter outputs to dst_base[r]. M filters need 1 + ceil(M/R)
// launches; a launch takes about n_chunks*NFT/P clocks, with
// n_chunks = ceil(n_points/(NFT-K+1)).
//
// Memory ports (float addresses; the DDR3 banks and their controller are
// outside this block): one data read port, R coefficient read ports and R
// write ports; see fetch_port and result_store for the protocols.
// Launch control: pulse `start` with the arguments stable; `busy` stays high
// until every word of the launch has been written. Arguments must stay
// stable while busy. n_points and K-1 must be multiples of P.
//
// From the original design: the two-launch AOLS scheme with a 1+j0 initial
// array, one shared data stream feeding three replicated pipelines, the
// power output, and the defaults NFT = 2048, P = 4, K = 421, R = 3. This
// design's own choices: the launch/status signals, the flat float address
// space standing in for the two DDR3 banks, per-pipeline coefficient read
// ports, and the chunk stride NFT-K+1 (standard overlap-save with K-1
// overlap; the original launch-time formula divides N by NFT-K).
module aols_p_top
  import fp32_pkg::*;
  import ftc_pkg::*;
#(
  parameter int NFT = NFT_DEF,   // FFT / chunk length N_FT
  parameter int P   = NPC_DEF,   // points per clock N_FT-PC
  parameter int K   = K_DEF,     // filter taps
  parameter int R   = NREP_DEF   // parallel pipelines (filters per launch)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // launch interface (kernel arguments)
  input  logic                     start,
  input  mode_e                    mode,
  input  logic [31:0]              n_points,
  input  logic [31:0]              n_chunks,
  input  logic [AW-1:0]            src_base,
  input  logic [R-1:0][AW-1:0]     coef_base,
  input  logic [R-1:0][AW-1:0]     dst_base,
  output logic                     busy,
  output logic [R-1:0]             stall,     // per pipeline FFT stall (status)
  output logic                     pad_word,  // zero-padding word multiplied (status)
  output logic [R-1:0]             dropped,   // output word past n_points dropped (status)
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
  // result write ports
  output logic [R-1:0]             wr_valid,
  input  logic [R-1:0]             wr_ready,
  output logic [R-1:0][AW-1:0]     wr_addr,
  output logic [R-1:0][P*64-1:0]   wr_data,
  output logic [R-1:0][2*P-1:0]    wr_strb
);
  logic                 fetch_busy;
  logic [R-1:0]         m_valid, m_ready, finished, active;
  cplx_t [R-1:0][P-1:0] m_data;
  mode_e                mode_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     mode_q <= MODE_FFT;
    else if (start) mode_q <= mode;
  end

  // pipelines that take part in the current launch
  assign active = (mode_q == MODE_FFT) ? R'(1) : '1;

  data_fetch_mult #(.NFT(NFT), .P(P), .K(K), .R(R)) u_fetch (
    .clk, .rst_n, .start, .mode, .n_points, .n_chunks, .src_base, .coef_base,
    .busy(fetch_busy), .pad_word,
    .drd_req_valid, .drd_req_ready, .drd_req_addr, .drd_resp_valid, .drd_resp_data,
    .crd_req_valid, .crd_req_ready, .crd_req_addr, .crd_resp_valid, .crd_resp_data,
    .out_valid(m_valid), .out_ready(m_ready), .out_data(m_data)
  );

  for (genvar r = 0; r < R; r++) begin : g_pipe
    aols_pipe #(.NFT(NFT), .P(P), .K(K)) u_pipe (
      .clk, .rst_n,
      .start(start && (mode == MODE_IFFT || r == 0)),
      .mode, .n_points, .n_chunks,
      .dst_base(dst_base[r]),
      .finished(finished[r]),
      .stall(stall[r]),
      .dropped(dropped[r]),
      .in_valid(m_valid[r]), .in_ready(m_ready[r]), .in_data(m_data[r]),
      .wr_valid(wr_valid[r]), .wr_ready(wr_ready[r]), .wr_addr(wr_addr[r]),
      .wr_data(wr_data[r]), .wr_strb(wr_strb[r])
    );
  end

  logic launched_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     launched_q <= 1'b0;
    else if (start) launched_q <= 1'b1;
  end

  assign busy = start || fetch_busy || (launched_q && ((finished | ~active) != '1));

endmodule
