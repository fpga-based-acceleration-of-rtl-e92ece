// chan_fifo_tb: self-checking test of the channel FIFO (W = 32, DEPTH = 8).
//
// Random pushes and pops, with phases that fill the FIFO completely and drain
// it completely. Checks word order against a queue model, that in_ready is
// low exactly when 8 words are stored, that out_valid is low exactly when
// none are, and that `count` always matches the model.
// The reference behaviour is the original block's function; sizes, stimulus
// and tolerances are the test's own choices.
module chan_fifo_tb;
  localparam int W = 32, DEPTH = 8;

  logic clk = 0, rst_n = 0, in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(DEPTH):0] count;
  always #5 clk = ~clk;

  chan_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] model [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      int ph;
      @(negedge clk);
      ph = (c / 200) % 3;   // 0: mostly push, 1: mostly pop, 2: random
      in_valid  = (ph == 0) ? ($urandom_range(0, 9) != 0) : (ph == 1) ? ($urandom_range(0, 9) == 0) : $urandom_range(0, 1);
      out_ready = (ph == 1) ? ($urandom_range(0, 9) != 0) : (ph == 0) ? ($urandom_range(0, 9) == 0) : $urandom_range(0, 1);
      in_data   = $urandom;
      // check flags against the model before the edge
      checks += 3;
      if (in_ready != (model.size() != DEPTH)) failures++;
      if (out_valid != (model.size() != 0)) failures++;
      if (count != model.size()) failures++;
      if (model.size() == DEPTH) n_full++;
      if (model.size() == 0) n_empty++;
      if (out_valid) begin
        checks++;
        if (out_data != model[0]) begin
          failures++;
          if (failures < 10) $display("got %h expected %h", out_data, model[0]);
        end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks += 2;
    if (n_full == 0) failures++;
    if (n_empty == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
