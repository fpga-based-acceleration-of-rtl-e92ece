// data_fetch_mult_tb: self-checking test of the data-fetch and element-wise
// multiplication kernel at NFT = 16, P = 4, K = 5, R = 2.
//
// Forward launch: a 40-point input is cut into 4 overlap-save chunks of 16
// points that start at points -4, 8, 20, 32 (stride NFT-K+1 = 12); points
// outside [0, 40) must come out as zero, every other point as x[g] times the
// coefficient (random here, 1+j0 in real use), and only pipeline 0 may get
// data. Inverse launch: chunk c of a 64-point intermediate array times the
// 16 coefficients of each filter must reach both pipelines. Memory
// back-pressure and random output stalls are on in the inverse launch.
// Products are compared with double-precision products; padding words are
// counted and must be 3 (one in front, two after the end).
// The reference behaviour is the original block's function; sizes, stimulus
// and tolerances are the test's own choices.
module data_fetch_mult_tb;
  import fp32_pkg::*;
  import ftc_pkg::*;

  localparam int NFT = 16, P = 4, K = 5, R = 2, T = NFT / P, L = NFT - K + 1;
  localparam int NPTS = 40, NCH = 4;
  localparam int A_IN = 0, A_INTER = 256, A_C0 = 512, A_C1 = 768;

  logic clk = 0, rst_n = 0, start, busy, pad_word, throttle;
  mode_e mode;
  logic [31:0] n_points, n_chunks;
  logic [AW-1:0] src_base;
  logic [R-1:0][AW-1:0] coef_base;
  logic drd_req_valid, drd_req_ready, drd_resp_valid;
  logic [AW-1:0] drd_req_addr;
  logic [P*64-1:0] drd_resp_data;
  logic [R-1:0] crd_req_valid, crd_req_ready, crd_resp_valid;
  logic [R-1:0][AW-1:0] crd_req_addr;
  logic [R-1:0][P*64-1:0] crd_resp_data;
  logic [R-1:0] out_valid, out_ready;
  cplx_t [R-1:0][P-1:0] out_data;
  logic [0:0] wr_ready_unused;
  always #5 clk = ~clk;

  data_fetch_mult #(.NFT(NFT), .P(P), .K(K), .R(R)) dut (.*);

  gmem_model #(.MEMW(1024), .P(P), .NRD(R + 1), .NWR(1), .LAT(3)) u_mem (
    .clk, .rst_n, .throttle,
    .rd_req_valid({crd_req_valid, drd_req_valid}),
    .rd_req_ready({crd_req_ready, drd_req_ready}),
    .rd_req_addr({crd_req_addr, drd_req_addr}),
    .rd_resp_valid({crd_resp_valid, drd_resp_valid}),
    .rd_resp_data({crd_resp_data, drd_resp_data}),
    .wr_valid(1'b0), .wr_ready(wr_ready_unused), .wr_addr('0), .wr_data('0), .wr_strb('0)
  );

  int checks = 0, failures = 0, n_pad = 0;
  int cnt [R];
  bit bp = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) for (int r = 0; r < R; r++) out_ready[r] = bp ? ($urandom_range(0, 2) != 0) : 1'b1;

  function automatic real rv();
    return (real'($urandom_range(0, 2000)) - 1000.0) / 100.0;
  endfunction

  // expected point n of word w of chunk c for pipeline r
  task automatic expect_pt(input int r, input int c, input int w, input int l, input cplx_t got);
    real ar, ai, br, bi, er, ei, gr, gi;
    int g, n, cb;
    n = w * P + l;
    cb = (r == 0) ? A_C0 : A_C1;
    if (mode == MODE_FFT) begin
      g = c * L - (K - 1) + n;
      if (g < 0 || g >= NPTS) begin ar = 0; ai = 0; end
      else begin
        ar = fp32_to_real(u_mem.mem[A_IN + 2*g]); ai = fp32_to_real(u_mem.mem[A_IN + 2*g + 1]);
      end
    end else begin
      g = c * NFT + n;
      ar = fp32_to_real(u_mem.mem[A_INTER + 2*g]); ai = fp32_to_real(u_mem.mem[A_INTER + 2*g + 1]);
    end
    br = fp32_to_real(u_mem.mem[cb + 2*n]); bi = fp32_to_real(u_mem.mem[cb + 2*n + 1]);
    er = ar * br - ai * bi; ei = ar * bi + ai * br;
    gr = fp32_to_real(got.re); gi = fp32_to_real(got.im);
    checks++;
    if ((gr - er) * (gr - er) + (gi - ei) * (gi - ei) > 1e-8 * (1.0 + er * er + ei * ei)) begin
      failures++;
      if (failures < 10) $display("mode %0d r %0d chunk %0d point %0d: got (%g,%g) expected (%g,%g)",
        mode, r, c, n, gr, gi, er, ei);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (pad_word) n_pad++;
    for (int r = 0; r < R; r++)
      if (out_valid[r] && out_ready[r]) begin
        if (mode == MODE_FFT && r != 0) begin
          checks++; failures++;
          $display("pipeline %0d got data in the forward launch", r);
        end
        for (int l = 0; l < P; l++)
          expect_pt(r, cnt[r] / T, cnt[r] % T, l, out_data[r][l]);
        cnt[r]++;
      end
  end

  task automatic run(input mode_e m);
    for (int r = 0; r < R; r++) cnt[r] = 0;
    @(negedge clk);
    mode = m;
    src_base = (m == MODE_FFT) ? A_IN : A_INTER;
    start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (4) @(negedge clk);
    checks++;
    if (cnt[0] != NCH * T || (m == MODE_IFFT && cnt[1] != NCH * T)) begin
      failures++;
      $display("mode %0d: %0d/%0d words delivered", m, cnt[0], cnt[1]);
    end
  endtask

  initial begin
    start = 0; throttle = 0; mode = MODE_FFT; n_points = NPTS; n_chunks = NCH;
    src_base = '0; coef_base[0] = A_C0; coef_base[1] = A_C1;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = real_to_fp32(rv());
    repeat (3) @(posedge clk); rst_n = 1;
    run(MODE_FFT);
    checks++;
    if (n_pad != 3) begin failures++; $display("%0d padding words, expected 3", n_pad); end
    throttle = 1; bp = 1;
    run(MODE_IFFT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
