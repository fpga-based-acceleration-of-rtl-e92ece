// result_store_tb: self-checking test of the output switch / power / store
// block at NFT = 16, P = 4, K = 5, 40 points in 4 chunks.
//
// Forward launch: 4 chunks x 4 words of complex points must be written
// unchanged, with all strobes, at dst + 2*(c*16 + 4w). Inverse launch:
// 4 chunks x 3 kept words must be written as powers at dst + c*12 + 4w with
// the low 4 strobes; the last 2 words of chunk 3 (points 40..47) must be
// dropped. Random write back-pressure. `finished` must rise after the last
// word and not before.
// The reference behaviour is the original block's function; sizes, stimulus
// and tolerances are the test's own choices.
module result_store_tb;
  import fp32_pkg::*;
  import ftc_pkg::*;

  localparam int NFT = 16, P = 4, K = 5, T = 4, L = 12, NPTS = 40, NCH = 4;

  logic clk = 0, rst_n = 0, start, finished, dropped, in_valid, in_ready, wr_valid, wr_ready;
  mode_e mode;
  logic [31:0] n_points, n_chunks;
  logic [AW-1:0] dst_base, wr_addr;
  cplx_t [P-1:0] in_data;
  logic [P*64-1:0] wr_data;
  logic [2*P-1:0] wr_strb;
  always #5 clk = ~clk;

  result_store #(.NFT(NFT), .P(P), .K(K)) dut (.*);

  int checks = 0, failures = 0, n_wr = 0, n_drop = 0;
  cplx_t [P-1:0] sent [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) wr_ready = ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n) begin
    if (dropped) n_drop++;
    if (wr_valid && wr_ready) begin
      int c, w, pt;
      logic [AW-1:0] ea;
      c = n_wr / ((mode == MODE_FFT) ? T : T - 1);
      w = n_wr % ((mode == MODE_FFT) ? T : T - 1);
      pt = c * L + w * P;
      ea = (mode == MODE_FFT) ? dst_base + 2 * (c * NFT + w * P) : dst_base + pt;
      checks++;
      if (wr_addr != ea) begin
        failures++;
        $display("write %0d: address %0d expected %0d", n_wr, wr_addr, ea);
      end
      for (int l = 0; l < P; l++) begin
        cplx_t x;
        x = sent[n_wr][l];
        checks++;
        if (mode == MODE_FFT) begin
          if (wr_data[64*l +: 64] != x || wr_strb != '1) failures++;
        end else begin
          real r, i, e, g;
          r = fp32_to_real(x.re); i = fp32_to_real(x.im);
          e = r * r + i * i; g = fp32_to_real(wr_data[32*l +: 32]);
          if (g - e > 1e-6 * e || e - g > 1e-6 * e || wr_strb != 8'h0F) begin
            failures++;
            $display("power %g expected %g", g, e);
          end
        end
      end
      n_wr++;
    end
  end

  task automatic run(input mode_e m, input int nwords);
    sent.delete(); n_wr = 0;
    @(negedge clk);
    mode = m; dst_base = (m == MODE_FFT) ? 1000 : 5000;
    start = 1;
    @(negedge clk); start = 0;
    for (int k = 0; k < nwords; k++) begin
      in_valid = 1;
      for (int l = 0; l < P; l++) begin
        in_data[l].re = real_to_fp32((real'($urandom_range(0, 2000)) - 1000.0) / 10.0);
        in_data[l].im = real_to_fp32((real'($urandom_range(0, 2000)) - 1000.0) / 10.0);
      end
      sent.push_back(in_data);
      checks++;
      if (finished) begin failures++; $display("finished early"); end
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    repeat (10) @(negedge clk);
    checks++;
    if (!finished) begin failures++; $display("not finished"); end
  endtask

  initial begin
    start = 0; in_valid = 0; in_data = '0; mode = MODE_FFT; dst_base = '0;
    n_points = NPTS; n_chunks = NCH;
    repeat (3) @(posedge clk); rst_n = 1;
    run(MODE_FFT, NCH * T);
    checks++;
    if (n_wr != NCH * T) begin failures++; $display("%0d complex writes", n_wr); end
    run(MODE_IFFT, NCH * (T - 1));
    checks += 2;
    if (n_wr != NCH * (T - 1) - 2) begin failures++; $display("%0d power writes", n_wr); end
    if (n_drop != 2) begin failures++; $display("%0d drops", n_drop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
