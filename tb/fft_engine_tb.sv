// fft_engine_tb: self-checking test of the streaming FFT/IFFT engine.
//
// Streams several frames of random complex SPF data through a reduced engine
// (N = 64, P = 4), some with gaps in the input and with random output stalls,
// and compares every output point with a direct DFT computed in double
// precision (output word t, lane l must hold X[bitrev(tP+l)]). One frame is
// sent in inverse mode. The latency of the first frame through an idle,
// unstalled engine must be N/P - 1 + log2(N) cycles.
// The reference behaviour is the original block's function; sizes, stimulus
// and tolerances are the test's own choices.
module fft_engine_tb;
  import fp32_pkg::*;
  import ftc_pkg::*;

  localparam int N = 64;
  localparam int P = 4;
  localparam int T = N / P;
  localparam int LOGN = $clog2(N);
  localparam int NFR = 5;

  logic clk = 0, rst_n = 0, en, inv, in_valid, out_valid;
  cplx_t [P-1:0] in_data, out_data;
  always #5 clk = ~clk;

  fft_engine #(.N(N), .P(P)) dut (.*);

  int checks = 0, failures = 0;
  real xr [NFR][N], xi [NFR][N];
  int  cyc = 0, first_in_cyc = -1, first_out_cyc = -1;
  int  out_cnt = 0;
  bit  stalls_on = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stall control (global en)
  always @(negedge clk) en = stalls_on ? ($urandom_range(0, 3) != 0) : 1'b1;

  // check outputs
  always @(posedge clk) begin
    if (rst_n && out_valid && en) begin
      int fr, t;
      fr = out_cnt / T; t = out_cnt % T;
      if (first_out_cyc < 0) first_out_cyc = cyc;
      for (int l = 0; l < P; l++) begin
        int k; real er, ei, gr, gi, mag, sgn;
        k = bitrev(t * P + l, LOGN);
        sgn = (fr == NFR - 1) ? 1.0 : -1.0;   // last frame is an IFFT
        er = 0; ei = 0;
        for (int n = 0; n < N; n++) begin
          real c, s;
          c = $cos(2.0 * PI * real'(n * k) / real'(N));
          s = sgn * $sin(2.0 * PI * real'(n * k) / real'(N));
          er += xr[fr][n] * c - xi[fr][n] * s;
          ei += xr[fr][n] * s + xi[fr][n] * c;
        end
        gr = fp32_to_real(out_data[l].re);
        gi = fp32_to_real(out_data[l].im);
        mag = 1e-3 + ((er < 0) ? -er : er) + ((ei < 0) ? -ei : ei);
        checks++;
        if (((gr - er) > 1e-4 * 8.0) || ((er - gr) > 1e-4 * 8.0) ||
            ((gi - ei) > 1e-4 * 8.0) || ((ei - gi) > 1e-4 * 8.0)) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH frame %0d k %0d: got %f %f exp %f %f", fr, k, gr, gi, er, ei);
        end
      end
      out_cnt++;
    end
  end

  initial begin
    for (int f = 0; f < NFR; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0;
        xi[f][n] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0;
      end
    in_valid = 0; inv = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFR; f++) begin
      if (f == 2) stalls_on = 1;
      if (f == NFR - 1) begin
        // drain, then switch the engine to inverse mode
        wait (out_cnt == (NFR - 1) * T);
        @(negedge clk); inv = 1;
      end
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        while (f >= 1 && f < 3 && $urandom_range(0, 4) == 0) begin
          in_valid = 0; @(negedge clk);
        end
        in_valid = 1;
        for (int l = 0; l < P; l++) begin
          in_data[l].re = real_to_fp32(xr[f][t * P + l]);
          in_data[l].im = real_to_fp32(xi[f][t * P + l]);
        end
        if (f == 0 && t == 0) first_in_cyc = cyc;
        @(posedge clk);
        while (!en) @(posedge clk);
      end
      @(negedge clk); in_valid = 0;
    end
    wait (out_cnt == NFR * T);
    repeat (5) @(posedge clk);
    checks++;
    if (first_out_cyc - first_in_cyc != T - 1 + LOGN) begin
      failures++;
      $display("latency %0d, expected %0d", first_out_cyc - first_in_cyc, T - 1 + LOGN);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
