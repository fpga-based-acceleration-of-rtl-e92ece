// gmem_model: behavioural model of the board's global memory (DDR3 banks
// behind their controller) for testbenches. Not synthesizable design logic.
//
// A flat array of MEMW 32-bit floats with NRD read ports and NWR write ports.
// Read requests (one P-point word, 2P floats from a float address) are taken
// when req_valid && req_ready and answered in order LAT clocks later.
// Writes take 2P floats with per-float strobes. When `throttle` is high,
// read requests are refused a quarter of the time and writes are accepted
// only a third of the time, at random, to exercise back-pressure. While
// rst_n is low no request is taken, so the random state of a design that
// is not yet reset cannot write into the memory. The array starts at zero
// (declaration initialiser), before any testbench process loads it.
// This model is not part of the original design, which uses the board's
// DDR3 banks; its latency and throttling pattern are the test's own choices.
module gmem_model #(
  parameter int MEMW = 1 << 16,
  parameter int P    = 4,
  parameter int NRD  = 4,
  parameter int NWR  = 3,
  parameter int LAT  = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        throttle,
  input  logic [NRD-1:0]              rd_req_valid,
  output logic [NRD-1:0]              rd_req_ready,
  input  logic [NRD-1:0][31:0]        rd_req_addr,
  output logic [NRD-1:0]              rd_resp_valid,
  output logic [NRD-1:0][P*64-1:0]    rd_resp_data,
  input  logic [NWR-1:0]              wr_valid,
  output logic [NWR-1:0]              wr_ready,
  input  logic [NWR-1:0][31:0]        wr_addr,
  input  logic [NWR-1:0][P*64-1:0]    wr_data,
  input  logic [NWR-1:0][2*P-1:0]     wr_strb
);
  logic [31:0] mem [MEMW] = '{default: '0};
  logic [P*64-1:0] pipe_d [NRD][LAT];
  logic            pipe_v [NRD][LAT];
  int n_writes = 0;

  initial begin
    for (int p = 0; p < NRD; p++)
      for (int s = 0; s < LAT; s++) pipe_v[p][s] = 1'b0;
    rd_req_ready = '1;
    wr_ready = '1;
  end

  always @(negedge clk) begin
    for (int p = 0; p < NRD; p++) rd_req_ready[p] = throttle ? ($urandom_range(0, 3) != 0) : 1'b1;
    for (int p = 0; p < NWR; p++) wr_ready[p] = throttle ? ($urandom_range(0, 2) == 0) : 1'b1;
  end

  function automatic logic [P*64-1:0] read_word(input logic [31:0] a);
    logic [P*64-1:0] w;
    // word layout: lane l occupies bits [64l +: 64] as {re, im}
    for (int l = 0; l < P; l++) begin
      w[64*l + 32 +: 32] = (a + 2*l     < MEMW) ? mem[a + 2*l]     : '0;
      w[64*l      +: 32] = (a + 2*l + 1 < MEMW) ? mem[a + 2*l + 1] : '0;
    end
    return w;
  endfunction

  always @(posedge clk) begin
    for (int p = 0; p < NRD; p++) begin
      for (int s = LAT - 1; s > 0; s--) begin
        pipe_v[p][s] <= pipe_v[p][s-1];
        pipe_d[p][s] <= pipe_d[p][s-1];
      end
      pipe_v[p][0] <= rst_n && rd_req_valid[p] && rd_req_ready[p];
      pipe_d[p][0] <= read_word(rd_req_addr[p]);
    end
    for (int p = 0; p < NWR; p++)
      if (rst_n && wr_valid[p] && wr_ready[p]) begin
        n_writes++;
        for (int f = 0; f < 2 * P; f++)
          if (wr_strb[p][f]) begin
            // float f of the word: complex lanes are {re, im}; power words
            // pack P floats in the low half, float f at bits [32f +: 32]
            if (wr_strb[p] == '1)
              mem[wr_addr[p] + f] <= wr_data[p][64*(f/2) + ((f % 2) ? 0 : 32) +: 32];
            else
              mem[wr_addr[p] + f] <= wr_data[p][32*f +: 32];
          end
      end
  end

  always_comb
    for (int p = 0; p < NRD; p++) begin
      rd_resp_valid[p] = pipe_v[p][LAT-1];
      rd_resp_data[p]  = pipe_d[p][LAT-1];
    end

endmodule
