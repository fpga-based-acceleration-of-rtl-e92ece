// power_calc_tb: self-checking test of the spectral-power stage.
//
// Random complex words go in, with and without output back-pressure; each
// output float must equal re^2 + im^2 of the matching input point to within
// 2^-22 relative error, and exact small cases (3+j4 -> 25, 0 -> 0) must be
// exact. Checks the rate of one word per clock without back-pressure.
// The reference behaviour is the original block's function; sizes, stimulus
// and tolerances are the test's own choices.
module power_calc_tb;
  import fp32_pkg::*;

  localparam int P = 4;
  localparam int NW = 300;

  logic clk = 0, rst_n = 0, in_valid, in_ready, out_valid, out_ready;
  cplx_t [P-1:0] in_data;
  logic [P-1:0][31:0] out_pow;
  always #5 clk = ~clk;

  power_calc #(.P(P)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, nout = 0, first_out = -1, last_out = -1;
  cplx_t [P-1:0] q [$];
  bit bp = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = bp ? ($urandom_range(0, 1) != 0) : 1'b1;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      cplx_t [P-1:0] x;
      x = q.pop_front();
      if (nout < 30) begin
        if (first_out < 0) first_out = cyc;
        last_out = cyc;
      end
      nout++;
      for (int l = 0; l < P; l++) begin
        real r, i, e, g, d;
        r = fp32_to_real(x[l].re); i = fp32_to_real(x[l].im);
        e = r * r + i * i;
        g = fp32_to_real(out_pow[l]);
        d = g - e; if (d < 0) d = -d;
        checks++;
        if (d > e * 2.4e-7) begin
          failures++;
          if (failures < 10) $display("|%g,%g|^2: got %g expected %g", r, i, g, e);
        end
      end
    end
  end

  initial begin
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      if (w == 50) bp = 1;
      in_valid = 1;
      for (int l = 0; l < P; l++) begin
        in_data[l].re = real_to_fp32((real'($urandom_range(0, 2000000)) - 1000000.0) / 1000.0);
        in_data[l].im = real_to_fp32((real'($urandom_range(0, 2000000)) - 1000000.0) / 1000.0);
      end
      if (w == 7) begin
        in_data[0].re = real_to_fp32(3.0); in_data[0].im = real_to_fp32(-4.0);
        in_data[1] = '0;
      end
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      q.push_back(in_data);
    end
    @(negedge clk); in_valid = 0;
    wait (nout == NW);
    checks++;
    if (last_out - first_out != 29) begin
      failures++;
      $display("30 words took %0d clocks", last_out - first_out + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
