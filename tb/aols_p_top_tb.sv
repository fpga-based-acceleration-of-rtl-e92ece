// aols_p_top_tb: end-to-end test of the R-pipeline overlap-save filter bank.
//
// Runs a small configuration (NFT = 64, P = 4, K = 9, R = 3) through one
// forward launch and two inverse launches that apply M = 6 random 9-tap
// complex filters to a 200-point random complex input. The host steps are
// modelled here: the testbench writes the input, the 1+j0 initial array and
// the pre-processed coefficients (each filter's 64-point DFT, scaled by
// 1/64) into the memory model, and it compares all 6 x 200 stored powers
// with |y[i]|^2, y[i] = sum_k x[i-k] h[k], computed directly in double
// precision. It also checks that the forward launch takes about
// n_chunks*NFT/P clocks and that each mechanism happened: FFT-engine stall,
// zero-padding words, dropped tail words, memory back-pressure and the
// switch from the forward to the inverse mode.
// The launch sequence and the host-side preparation follow the original
// two-launch scheme; sizes, data and the memory model are the test's own.
module aols_p_top_tb;
  import fp32_pkg::*;
  import ftc_pkg::*;

  localparam int NFT = 64, P = 4, K = 9, R = 3;
  localparam int T = NFT / P, L = NFT - K + 1;
  localparam int NPTS = 200;
  localparam int NCH = (NPTS + L - 1) / L;
  localparam int M = 6;
  localparam int A_IN = 0, A_INTER = 1024, A_INIT = 2048, A_COEF = 4096, A_OUT = 8192;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, pad_word, throttle;
  mode_e mode;
  logic [31:0] n_points, n_chunks;
  logic [AW-1:0] src_base;
  logic [R-1:0][AW-1:0] coef_base, dst_base;
  logic [R-1:0] stall, dropped;
  logic drd_req_valid, drd_req_ready, drd_resp_valid;
  logic [AW-1:0] drd_req_addr;
  logic [P*64-1:0] drd_resp_data;
  logic [R-1:0] crd_req_valid, crd_req_ready, crd_resp_valid;
  logic [R-1:0][AW-1:0] crd_req_addr;
  logic [R-1:0][P*64-1:0] crd_resp_data;
  logic [R-1:0] wr_valid, wr_ready;
  logic [R-1:0][AW-1:0] wr_addr;
  logic [R-1:0][P*64-1:0] wr_data;
  logic [R-1:0][2*P-1:0] wr_strb;

  aols_p_top #(.NFT(NFT), .P(P), .K(K), .R(R)) dut (.*);

  gmem_model #(.MEMW(16384), .P(P), .NRD(R + 1), .NWR(R), .LAT(4)) u_mem (
    .clk, .rst_n, .throttle,
    .rd_req_valid({crd_req_valid, drd_req_valid}),
    .rd_req_ready({crd_req_ready, drd_req_ready}),
    .rd_req_addr({crd_req_addr, drd_req_addr}),
    .rd_resp_valid({crd_resp_valid, drd_resp_valid}),
    .rd_resp_data({crd_resp_data, drd_resp_data}),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb
  );

  int checks = 0, failures = 0;
  int n_stall = 0, n_pad = 0, n_drop = 0, n_bp = 0, n_switch = 0;
  real xr [NPTS], xi [NPTS], hr [M][K], hi [M][K];

  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < R; r++) begin
      if (stall[r]) n_stall++;
      if (dropped[r]) n_drop++;
      if (wr_valid[r] && !wr_ready[r]) n_bp++;
    end
    if (pad_word) n_pad++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic launch(input mode_e m, input int src, input int cb[R], input int db[R],
                        output int cycles);
    @(negedge clk);
    mode = m; src_base = src;
    for (int r = 0; r < R; r++) begin coef_base[r] = cb[r]; dst_base[r] = db[r]; end
    start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc_fft, cyc_inv, cb[R], db[R];
    mode_e last_mode;
    start = 0; throttle = 0; mode = MODE_FFT; src_base = '0; coef_base = '0; dst_base = '0;
    n_points = NPTS; n_chunks = NCH;
    // host data
    for (int i = 0; i < NPTS; i++) begin
      xr[i] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0;
      xi[i] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0;
      u_mem.mem[A_IN + 2*i]     = real_to_fp32(xr[i]);
      u_mem.mem[A_IN + 2*i + 1] = real_to_fp32(xi[i]);
    end
    for (int k = 0; k < NFT; k++) begin
      u_mem.mem[A_INIT + 2*k] = real_to_fp32(1.0);
      u_mem.mem[A_INIT + 2*k + 1] = '0;
    end
    for (int f = 0; f < M; f++) begin
      for (int k = 0; k < K; k++) begin
        hr[f][k] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 / real'(K);
        hi[f][k] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 / real'(K);
      end
      for (int k = 0; k < NFT; k++) begin
        real sr, si;
        sr = 0; si = 0;
        for (int n = 0; n < K; n++) begin
          real c, s;
          c = $cos(2.0 * PI * real'(n * k) / real'(NFT));
          s = -$sin(2.0 * PI * real'(n * k) / real'(NFT));
          sr += hr[f][n] * c - hi[f][n] * s;
          si += hr[f][n] * s + hi[f][n] * c;
        end
        u_mem.mem[A_COEF + f * 2 * NFT + 2*k]     = real_to_fp32(sr / real'(NFT));
        u_mem.mem[A_COEF + f * 2 * NFT + 2*k + 1] = real_to_fp32(si / real'(NFT));
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;

    // launch 1: forward FFT of the chunks into the intermediate array
    for (int r = 0; r < R; r++) begin cb[r] = A_INIT; db[r] = (r == 0) ? A_INTER : 0; end
    launch(MODE_FFT, A_IN, cb, db, cyc_fft);
    last_mode = MODE_FFT;
    checks++;
    if (cyc_fft < NCH * T || cyc_fft > NCH * T + 3 * T + 60) begin
      failures++;
      $display("forward launch took %0d clocks, expected about %0d", cyc_fft, NCH * T);
    end
    $display("forward launch: %0d clocks for %0d chunks", cyc_fft, NCH);

    // launches 2 and 3: three filters each; the second under memory throttling
    for (int g = 0; g < M / R; g++) begin
      throttle = (g == 1);
      for (int r = 0; r < R; r++) begin
        cb[r] = A_COEF + (g * R + r) * 2 * NFT;
        db[r] = A_OUT + (g * R + r) * 256;
      end
      launch(MODE_IFFT, A_INTER, cb, db, cyc_inv);
      if (last_mode != MODE_IFFT) n_switch++;
      last_mode = MODE_IFFT;
      $display("inverse launch %0d: %0d clocks", g, cyc_inv);
    end
    throttle = 0;

    // compare powers
    for (int f = 0; f < M; f++) begin
      real pk, e[NPTS];
      pk = 0;
      for (int i = 0; i < NPTS; i++) begin
        real yr, yi;
        yr = 0; yi = 0;
        for (int k = 0; k < K; k++)
          if (i - k >= 0) begin
            yr += xr[i-k] * hr[f][k] - xi[i-k] * hi[f][k];
            yi += xr[i-k] * hi[f][k] + xi[i-k] * hr[f][k];
          end
        e[i] = yr * yr + yi * yi;
        if (e[i] > pk) pk = e[i];
      end
      for (int i = 0; i < NPTS; i++) begin
        real got, d;
        got = fp32_to_real(u_mem.mem[A_OUT + f * 256 + i]);
        d = got - e[i];
        if (d < 0) d = -d;
        checks++;
        if (d > 1e-4 * pk) begin
          failures++;
          if (failures < 10) $display("filter %0d point %0d: got %g expected %g", f, i, got, e[i]);
        end
      end
    end

    $display("mechanisms: stall=%0d pad=%0d drop=%0d mem_backpressure=%0d mode_switch=%0d",
             n_stall, n_pad, n_drop, n_bp, n_switch);
    checks += 5;
    if (n_stall == 0)  begin failures++; $display("no FFT stall seen"); end
    if (n_pad == 0)    begin failures++; $display("no padding word seen"); end
    if (n_drop == 0)   begin failures++; $display("no tail drop seen"); end
    if (n_bp == 0)     begin failures++; $display("no memory back-pressure seen"); end
    if (n_switch == 0) begin failures++; $display("no mode switch seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
