// fft_lane_stage: one radix-2 decimation-in-frequency stage of the streaming
// FFT engine for a butterfly whose two inputs travel in the same clock cycle.
//
// Point x travels in lane x mod P. When 2^S < P, point x and its partner
// x + 2^S are lanes l and l + 2^S of the same word, so the stage is P/2
// butterflies side by side: lane l gets a+b and lane l+2^S gets (a-b)*W with
// W = exp(-+j*2*pi*(l mod 2^S)*N/2^(S+1)/N). The twiddles are constants.
// One register stage; it advances only when `en` is high. `inv` selects
// conjugate twiddles (IFFT).
// Part of this design's own FFT structure (the original uses a vendor core).
module fft_lane_stage
  import fp32_pkg::*;
#(
  parameter int N = 2048,  // FFT length
  parameter int P = 4,     // lanes
  parameter int S = 0      // butterfly bit, 2^S < P
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
  localparam int H    = 1 << S;

  cplx_t [P-1:0] tw_rom;

  initial begin
    for (int l = 0; l < P; l++) tw_rom[l] = twiddle((l % H) << (LOGN - 1 - S), N);
  end

  cplx_t [P-1:0] bfly_c;

  always_comb begin
    for (int l = 0; l < P; l++) begin
      cplx_t w;
      w = tw_rom[l];
      if (inv) w.im = fp_neg(w.im);
      if ((l & H) == 0) bfly_c[l] = c_add(in_data[l], in_data[l + H]);
      else              bfly_c[l] = c_mul(c_sub(in_data[l - H], in_data[l]), w);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  out_valid <= 1'b0;
    else if (en) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (en && in_valid) out_data <= bfly_c;
  end

endmodule
