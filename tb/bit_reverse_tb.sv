// bit_reverse_tb: self-checking test of the bit-reverse / overlap-discard
// block at N = 64, P = 4, K = 9.
//
// Frames are written as the FFT engine would deliver them (word t, lane l
// holds the point whose natural index is bitrev(tP+l)); each point carries
// its frame number and natural index as its value. Frames 0-2 are read with
// discard off and must come out as indices 0..63; frames 3-5 with discard on
// must come out as 8..63. Random gaps on the input and random back-pressure
// on the output are applied. Also checks that out_valid rises on the clock
// edge after the one that writes the last word of a frame (the word is taken
// by the consumer on the following edge).
// The reference behaviour is the original block's function; sizes, stimulus
// and tolerances are the test's own choices.
module bit_reverse_tb;
  import fp32_pkg::*;
  import ftc_pkg::*;

  localparam int N = 64, P = 4, K = 9, T = N / P, LOGN = 6;
  localparam int NFR = 6;

  logic clk = 0, rst_n = 0, discard, in_valid, in_ready, out_valid, out_ready;
  cplx_t [P-1:0] in_data, out_data;
  always #5 clk = ~clk;

  bit_reverse #(.N(N), .P(P), .K(K)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int ofr = 0, ok = 0;  // expected frame / next expected index
  int last_wr_cyc = -1, first_rd_cyc = -1;
  bit bp = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = bp ? ($urandom_range(0, 2) != 0) : 1'b1;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (first_rd_cyc < 0) first_rd_cyc = cyc;
      if (ok == 0) ok = (ofr >= 3) ? K - 1 : 0;
      for (int l = 0; l < P; l++) begin
        checks++;
        if (out_data[l].re != 32'(ofr) || out_data[l].im != 32'(ok + l)) begin
          failures++;
          if (failures < 10) $display("frame %0d: got %0d/%0d expected %0d/%0d",
            ofr, out_data[l].re, out_data[l].im, ofr, ok + l);
        end
      end
      ok += P;
      if (ok == N) begin ok = 0; ofr++; end
    end
  end

  initial begin
    in_valid = 0; discard = 0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < NFR; f++) begin
      if (f == 3) begin
        wait (ofr == 3); @(negedge clk); discard = 1;
      end
      if (f == 2) bp = 1;
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        while (f == 2 && $urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        for (int l = 0; l < P; l++) begin
          in_data[l].re = 32'(f);
          in_data[l].im = 32'(bitrev(t * P + l, LOGN));
        end
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (f == 0 && t == T - 1) last_wr_cyc = cyc;
      end
      @(negedge clk); in_valid = 0;
    end
    wait (ofr == NFR);
    checks++;
    if (first_rd_cyc - last_wr_cyc != 2) begin
      failures++;
      $display("first read %0d cycles after last write", first_rd_cyc - last_wr_cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
