// fft_sdf_stage: one radix-2 decimation-in-frequency stage of the streaming
// FFT engine, for a butterfly whose two inputs arrive in different clock
// cycles of the same lane.
//
// The engine carries P points per clock; point x of a frame travels in lane
// x mod P during cycle x / P. This stage pairs point x with point x + 2^S,
// where 2^S >= P, so the partner arrives D = 2^S / P cycles later in the same
// lane. Each lane works as a single-path delay-feedback (SDF) stage that
// shares one controller with the other lanes:
//   * first D valid inputs of every 2D block are stored in the delay buffer;
//   * during the next D inputs the stage emits a+b at once and writes
//     (a-b)*W into the buffer, where W = exp(-+j*2*pi*e/N) with
//     e = (x mod 2^S) * N / 2^(S+1);
//   * the stored differences then leave the buffer one per clock, in order,
//     while the next block fills it (or, at the end of a stream, on their own).
// So the stage keeps point order, passes P points per clock and delays the
// stream by D cycles plus one register.
//
// Timing: every register advances only when `en` is high (global stall used
// by the engine); an output word is transferred on a clock edge where
// out_valid and en are both high. `inv` selects conjugate twiddles (IFFT) and
// must stay constant during a frame.
// Part of this design's own FFT structure (the original uses a vendor core).
module fft_sdf_stage
  import fp32_pkg::*;
#(
  parameter int N = 2048,  // FFT length
  parameter int P = 4,     // lanes (points per clock)
  parameter int S = 10     // butterfly bit: partners are 2^S points apart
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              inv,
  input  logic              in_valid,
  input  cplx_t [P-1:0]     in_data,
  output logic              out_valid,
  output cplx_t [P-1:0]     out_data
);
  localparam int LOGN = $clog2(N);
  localparam int LOGP = $clog2(P);
  localparam int D    = 1 << (S - LOGP);
  localparam int CW   = $clog2(2 * D);
  localparam int DW   = (D > 1) ? $clog2(D) : 1;

  cplx_t [P-1:0] dly_q  [D];   // delay/feedback buffer, one word of P lanes
  cplx_t [P-1:0] tw_rom [D];   // forward twiddles for the second half-block

  initial begin
    for (int m = 0; m < D; m++)
      for (int l = 0; l < P; l++)
        tw_rom[m][l] = twiddle((m * P + l) << (LOGN - 1 - S), N);
  end

  logic [CW-1:0] cnt_q;   // position of the next input within its 2D block
  logic [DW-1:0] rd_q;    // next stored difference to emit
  logic          pend_q;  // stored differences are waiting to leave
  logic          second;
  logic [DW-1:0] m_idx;
  logic [DW-1:0] w_idx;

  assign second = (cnt_q >= CW'(D));
  assign m_idx  = DW'(cnt_q - CW'(D));
  assign w_idx  = DW'(cnt_q);

  cplx_t [P-1:0] sum_c, prod_c;

  always_comb begin
    for (int l = 0; l < P; l++) begin
      cplx_t a, w;
      a = dly_q[m_idx][l];
      w = tw_rom[m_idx][l];
      if (inv) w.im = fp_neg(w.im);
      sum_c[l]  = c_add(a, in_data[l]);
      prod_c[l] = c_mul(c_sub(a, in_data[l]), w);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q     <= '0;
      rd_q      <= '0;
      pend_q    <= 1'b0;
      out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= 1'b0;
      if (in_valid && second) begin
        out_valid <= 1'b1;
      end else if (pend_q) begin
        out_valid <= 1'b1;
        rd_q      <= (rd_q == DW'(D - 1)) ? '0 : rd_q + 1'b1;
        if (rd_q == DW'(D - 1)) pend_q <= 1'b0;
      end
      if (in_valid) begin
        if (cnt_q == CW'(2 * D - 1)) begin
          cnt_q  <= '0;
          pend_q <= 1'b1;
          rd_q   <= '0;
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      if (in_valid && second)  out_data <= sum_c;
      else if (pend_q)         out_data <= dly_q[rd_q];
      if (in_valid && !second) dly_q[w_idx] <= in_data;
      if (in_valid && second)  dly_q[m_idx] <= prod_c;
    end
  end

  // A butterfly output and a stored difference never compete for the output:
  // the differences of one block have all left before the next block reaches
  // its second half.
  a_no_collision : assert property (@(posedge clk) disable iff (!rst_n)
    (en && in_valid && second) |-> !pend_q);

endmodule
