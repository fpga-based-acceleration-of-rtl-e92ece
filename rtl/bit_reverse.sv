// bit_reverse: reorders each FFT output frame from bit-reversed to natural
// order and, when `discard` is set, drops the first K-1 points of the frame
// (the overlap-save step "discard the front K-1 points").
//
// The FFT engine delivers word t, lane l = point X[bitrev(tP+l)]. A frame of
// N points is written into one half of a ping-pong buffer while the other
// half is read out in natural order, P points per clock. The buffer is split
// into P single-port banks so that both the write (P points of one row) and
// the read (P points that sit in one lane but in P different rows) touch
// every bank exactly once: point (row t, lane l) is kept in bank
// (l + top_log2P_bits(t)) mod P at address t. This skew is this design's own
// choice; the original bit-reverse kernel is an NDRange kernel whose insides
// are not given.
//
// Interface: valid/ready in and out, one word of P points per clock each way.
// A frame is written in N/P input words; it is read out in N/P words, or
// N/P - (K-1)/P words when `discard` is high. `discard` must be stable during
// a launch and (K-1) must be a multiple of P. Latency: out_valid rises on the
// clock edge after the one that writes the last word of a frame.
module bit_reverse
  import fp32_pkg::*;
#(
  parameter int N = 2048,  // frame (FFT) length
  parameter int P = 4,     // points per word
  parameter int K = 421    // filter taps; K-1 points are discarded
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          discard,
  input  logic          in_valid,
  output logic          in_ready,
  input  cplx_t [P-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output cplx_t [P-1:0] out_data
);
  localparam int LOGN = $clog2(N);
  localparam int LOGP = $clog2(P);
  localparam int T    = N / P;
  localparam int LOGT = LOGN - LOGP;
  localparam int SKIP = (K - 1) / P;   // words dropped at the front

  cplx_t         bank_q [P][2*T];
  logic [1:0]    full_q;
  logic          wsel_q, rsel_q;
  logic [LOGT-1:0] wrow_q, ru_q;

  function automatic int unsigned top_bits(input int unsigned row);
    return (row >> (LOGT - LOGP)) & (P - 1);
  endfunction

  // ---------------- write side ----------------
  assign in_ready = !full_q[wsel_q];
  logic wr;
  assign wr = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (wr)
      for (int l = 0; l < P; l++)
        bank_q[(l + top_bits(32'(wrow_q))) % P][{wsel_q, wrow_q}] <= in_data[l];
  end

  // ---------------- read side ----------------
  logic rd;
  assign rd = full_q[rsel_q] && (!out_valid || out_ready);

  cplx_t [P-1:0] rd_data;
  always_comb begin
    int unsigned x0, lp;
    x0 = ftc_pkg::bitrev(ru_q * P, LOGN);   // position of point uP
    lp = x0 & (P - 1);                      // lane shared by the P points
    for (int l = 0; l < P; l++) begin
      int unsigned x, row, b;
      x   = x0 | (ftc_pkg::bitrev(l, LOGP) << LOGT);
      row = x >> LOGP;
      b   = (lp + top_bits(row)) % P;
      rd_data[l] = bank_q[b][{rsel_q, row[LOGT-1:0]}];
    end
  end

  always_ff @(posedge clk) begin
    if (rd) out_data <= rd_data;
  end

  logic [LOGT-1:0] first_u;
  assign first_u = discard ? LOGT'(SKIP) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q    <= '0;
      wsel_q    <= 1'b0;
      rsel_q    <= 1'b0;
      wrow_q    <= '0;
      ru_q      <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (rd) begin
        out_valid <= 1'b1;
        if (ru_q == LOGT'(T - 1)) begin
          full_q[rsel_q] <= 1'b0;
          rsel_q         <= ~rsel_q;
        end
      end
      // next read index: restart at the first kept word of the next frame
      if (rd && ru_q == LOGT'(T - 1)) ru_q <= first_u;
      else if (rd)                    ru_q <= ru_q + 1'b1;
      else if (!full_q[rsel_q])      ru_q <= first_u;
      if (wr) begin
        if (wrow_q == LOGT'(T - 1)) begin
          wrow_q         <= '0;
          full_q[wsel_q] <= 1'b1;
          wsel_q         <= ~wsel_q;
        end else begin
          wrow_q <= wrow_q + 1'b1;
        end
      end
    end
  end

  initial assert ((K - 1) % P == 0 && LOGT >= LOGP)
    else $error("bit_reverse: K-1 must be a multiple of P and N >= P*P");

endmodule
