// cmul_tb: self-checking test of the P-lane complex SPF multiplier.
//
// Streams random complex words (magnitudes from 1e-3 to 1e3, both signs)
// through the stage, first with the output always ready, then with random
// back-pressure, and compares each product with the double-precision product
// (relative error below 1e-6 of the operand magnitudes' product). Also checks
// exact cases (x * (1+j0) = x) and the rate: 64 words with no back-pressure
// must leave in consecutive clocks (the first 48 are timed).
// The reference behaviour is the original block's function; sizes, stimulus
// and tolerances are the test's own choices.
module cmul_tb;
  import fp32_pkg::*;

  localparam int P = 4;
  localparam int NW = 400;

  logic clk = 0, rst_n = 0, in_valid, in_ready, out_valid, out_ready;
  cplx_t [P-1:0] in_a, in_b, out_data;
  always #5 clk = ~clk;

  cmul #(.P(P)) dut (.*);

  int checks = 0, failures = 0;
  cplx_t [P-1:0] qa [$], qb [$];
  bit bp = 0;
  int first_out = -1, last_out = -1, cyc = 0, nout = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd_val();
    real m;
    m = real'($urandom_range(1, 1000000)) / 1000.0;  // 0.001 .. 1000
    return ($urandom_range(0, 1) != 0) ? -m : m;
  endfunction

  always @(negedge clk) out_ready = bp ? ($urandom_range(0, 2) != 0) : 1'b1;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      cplx_t [P-1:0] a, b;
      a = qa.pop_front(); b = qb.pop_front();
      if (nout < 48) begin
        if (first_out < 0) first_out = cyc;
        last_out = cyc;
      end
      nout++;
      for (int l = 0; l < P; l++) begin
        real ar, ai, br, bi, er, ei, gr, gi, tol;
        ar = fp32_to_real(a[l].re); ai = fp32_to_real(a[l].im);
        br = fp32_to_real(b[l].re); bi = fp32_to_real(b[l].im);
        er = ar * br - ai * bi; ei = ar * bi + ai * br;
        gr = fp32_to_real(out_data[l].re); gi = fp32_to_real(out_data[l].im);
        tol = 1e-6 * ((ar < 0 ? -ar : ar) + (ai < 0 ? -ai : ai)) *
                     ((br < 0 ? -br : br) + (bi < 0 ? -bi : bi));
        checks++;
        if ((gr - er > tol) || (er - gr > tol) || (gi - ei > tol) || (ei - gi > tol)) begin
          failures++;
          if (failures < 10) $display("(%g,%g)*(%g,%g): got (%g,%g)", ar, ai, br, bi, gr, gi);
        end
        if (b[l] == {FP_ONE_BITS, 32'd0}) begin
          checks++;
          if (out_data[l] != a[l]) failures++;
        end
      end
    end
  end

  localparam logic [31:0] FP_ONE_BITS = 32'h3F80_0000;

  initial begin
    in_valid = 0; in_a = '0; in_b = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      if (w == 64) bp = 1;
      in_valid = 1;
      for (int l = 0; l < P; l++) begin
        in_a[l].re = real_to_fp32(rnd_val()); in_a[l].im = real_to_fp32(rnd_val());
        if (w % 5 == 0) in_b[l] = {FP_ONE_BITS, 32'd0};
        else begin
          in_b[l].re = real_to_fp32(rnd_val()); in_b[l].im = real_to_fp32(rnd_val());
        end
      end
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      qa.push_back(in_a); qb.push_back(in_b);
    end
    @(negedge clk); in_valid = 0;
    wait (nout == NW);
    checks++;
    if (last_out - first_out != 47) begin
      failures++;
      $display("48 words took %0d clocks", last_out - first_out + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
