// fft_engine: streaming, run-time reconfigurable FFT/IFFT of N complex SPF
// points that accepts and delivers P points per clock.
//
// Input points come in natural order, P consecutive points per word (point x
// in lane x mod P of word x / P). Output word t, lane l carries X[bitrev(tP+l)]:
// the transform leaves the engine in bit-reversed order, as in the original
// design, and a separate bit-reverse block restores natural order.
//
// Structure: log2(N) radix-2 decimation-in-frequency stages. The stages whose
// butterfly partners are 2^S >= P points apart are parallel single-path
// delay-feedback stages (fft_sdf_stage, delays N/2P, N/4P, ..., 1 cycles);
// the last log2(P) stages pair points inside one word (fft_lane_stage). The
// delays add up to N/P - 1 cycles, the engine latency quoted for the original
// engine; each stage adds one register, so the first output word appears
// N/P - 1 + log2(N) cycles after the first input word.
//
// The original engine is a vendor radix-4 feedforward core; this radix-2 SDF
// structure is this design's own choice with the same function, order and
// throughput. `inv` selects the inverse transform without 1/N scaling (the
// scale is folded into the pre-processed filter coefficients).
//
// Flow control: a global stall. All registers advance only when `en` is high;
// an input word is taken when in_valid && en, an output word is delivered
// when out_valid && en.
module fft_engine
  import fp32_pkg::*;
#(
  parameter int N = 2048,  // FFT length N_FT
  parameter int P = 4      // points per clock N_FT-PC
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          inv,
  input  logic          in_valid,
  input  cplx_t [P-1:0] in_data,
  output logic          out_valid,
  output cplx_t [P-1:0] out_data
);
  localparam int LOGN = $clog2(N);
  localparam int LOGP = $clog2(P);

  logic          sv [LOGN+1];
  cplx_t [P-1:0] sd [LOGN+1];

  assign sv[0] = in_valid;
  assign sd[0] = in_data;

  for (genvar k = 0; k < LOGN; k++) begin : g_stage
    localparam int S = LOGN - 1 - k;
    if (S >= LOGP) begin : g_sdf
      fft_sdf_stage #(.N(N), .P(P), .S(S)) u_stage (
        .clk, .rst_n, .en, .inv,
        .in_valid(sv[k]), .in_data(sd[k]),
        .out_valid(sv[k+1]), .out_data(sd[k+1])
      );
    end else begin : g_lane
      fft_lane_stage #(.N(N), .P(P), .S(S)) u_stage (
        .clk, .rst_n, .en, .inv,
        .in_valid(sv[k]), .in_data(sd[k]),
        .out_valid(sv[k+1]), .out_data(sd[k+1])
      );
    end
  end

  assign out_valid = sv[LOGN];
  assign out_data  = sd[LOGN];

  initial begin
    assert ((1 << LOGN) == N && (1 << LOGP) == P && LOGN >= 2 * LOGP)
      else $error("fft_engine: N and P must be powers of two with N >= P*P");
  end

endmodule
