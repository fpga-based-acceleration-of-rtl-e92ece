// cmul: P complex single-precision multipliers side by side, with a
// valid/ready register stage. This is the element-wise multiplication of the
// data-fetch kernel: each of the P points of a word is multiplied by the
// matching point of a coefficient word,
//   (a + jb)(c + jd) = (ac - bd) + j(ad + bc),
// four SPF multiplications and two SPF additions per point (the original
// design spends four DSP blocks per complex multiplication).
//
// Timing: one register stage. A word is accepted when in_valid && in_ready,
// and in_ready = !out_valid || out_ready, so the stage runs at one word per
// clock without bubbles.
module cmul
  import fp32_pkg::*;
#(
  parameter int P = 4  // points per word
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  cplx_t [P-1:0] in_a,
  input  cplx_t [P-1:0] in_b,
  output logic          out_valid,
  input  logic          out_ready,
  output cplx_t [P-1:0] out_data
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid)
      for (int l = 0; l < P; l++) out_data[l] <= c_mul(in_a[l], in_b[l]);
  end

endmodule
