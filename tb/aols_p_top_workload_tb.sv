// aols_p_top_workload_tb: the smallest input size of the pulsar-search
// workload, 2^18 complex SPF points, through the convolver at its default
// parameters (NFT = 2048, P = 4, K = 421, R = 3). One forward launch turns
// the 162 overlap-save chunks into the intermediate array; one filtering
// launch applies three random 421-tap filters (three of the 84 templates of
// a full search; the other 81 would reuse the same intermediate array in 27
// more identical launches). All 3 x 2^18 stored powers are compared with
// |y[i]|^2 of a direct double-precision convolution, and both launches must
// take about 162 * 512 clocks.
// The workload size and filter length are the original ones; the random data
// and the memory model are the test's own.
module aols_p_top_workload_tb;
  import fp32_pkg::*;
  import ftc_pkg::*;

  localparam int NFT = NFT_DEF, P = NPC_DEF, K = K_DEF, R = NREP_DEF;
  localparam int T = NFT / P, L = NFT - K + 1;
  localparam int NPTS = 1 << 18;
  localparam int NCH = (NPTS + L - 1) / L;
  localparam int M = R;
  localparam int A_IN = 0, A_INTER = 2 * NPTS, A_INIT = A_INTER + 2 * NCH * NFT,
                 A_COEF = A_INIT + 2 * NFT, A_OUT = A_COEF + 2 * NFT * M;

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

  aols_p_top dut (.*);

  gmem_model #(.MEMW(1 << 21), .P(P), .NRD(R + 1), .NWR(R), .LAT(4)) u_mem (
    .clk, .rst_n, .throttle,
    .rd_req_valid({crd_req_valid, drd_req_valid}),
    .rd_req_ready({crd_req_ready, drd_req_ready}),
    .rd_req_addr({crd_req_addr, drd_req_addr}),
    .rd_resp_valid({crd_resp_valid, drd_resp_valid}),
    .rd_resp_data({crd_resp_data, drd_resp_data}),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb
  );

  int checks = 0, failures = 0;
  real xr [NPTS], xi [NPTS], hr [M][K], hi [M][K];

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
    checks++;
    if (cyc_fft < NCH * T || cyc_fft > NCH * T + 3 * T + 60) begin
      failures++;
      $display("forward launch took %0d clocks, expected about %0d", cyc_fft, NCH * T);
    end
    $display("forward launch: %0d clocks for %0d chunks", cyc_fft, NCH);

    // launch 2: three filters, one per pipeline
    for (int g = 0; g < M / R; g++) begin
      for (int r = 0; r < R; r++) begin
        cb[r] = A_COEF + (g * R + r) * 2 * NFT;
        db[r] = A_OUT + (g * R + r) * NPTS;
      end
      launch(MODE_IFFT, A_INTER, cb, db, cyc_inv);
      $display("inverse launch %0d: %0d clocks", g, cyc_inv);
      checks++;
      if (cyc_inv < NCH * T || cyc_inv > NCH * T + 3 * T + 60) begin
        failures++;
        $display("inverse launch took %0d clocks, expected about %0d", cyc_inv, NCH * T);
      end
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
        got = fp32_to_real(u_mem.mem[A_OUT + f * NPTS + i]);
        d = got - e[i];
        if (d < 0) d = -d;
        checks++;
        if (d > 1e-4 * pk) begin
          failures++;
          if (failures < 10) $display("filter %0d point %0d: got %g expected %g", f, i, got, e[i]);
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
