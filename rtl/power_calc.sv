// power_calc: spectral power of P complex SPF points per clock.
//
// Only the power |y|^2 = re^2 + im^2 of each filter output is needed by the
// harmonic-summing stage, so the square root is left out and each point
// shrinks from 64 to 32 bits, which halves the output bandwidth. Two SPF
// multiplications and one SPF addition per point.
//
// Timing: one valid/ready register stage, one word per clock.
// The power-instead-of-magnitude output follows the original design; the
// single register stage is this design's choice.
module power_calc
  import fp32_pkg::*;
#(
  parameter int P = 4  // points per word
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  cplx_t [P-1:0]       in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [P-1:0][31:0]  out_pow
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid)
      for (int l = 0; l < P; l++) out_pow[l] <= c_pow(in_data[l]);
  end

endmodule
