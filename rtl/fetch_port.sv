// fetch_port: one global-memory read stream of the data-fetch kernel.
//
// It walks through n_chunks chunks of `words` words (P points each) and asks
// for point g = c*chunk_stride + w*P + offset of chunk c, word w, at float
// address base + 2g (complex points are stored as re, im float pairs). When
// `check_range` is set, a word whose points fall outside [0, n_points) is
// not read at all but delivered as zeros: this produces the K-1 zero points
// in front of the first overlap-save chunk and the zeros after the end of
// the input. Words come out in order on a valid/ready stream with a `zero`
// flag instead of data for the skipped ones.
//
// Memory port: req_valid/req_ready/req_addr; responses come back in order on
// resp_valid/resp_data one clock or more later and cannot be refused. At most
// DEPTH words are requested but not yet delivered, so the response FIFO never
// overflows. Words with partial range are not supported: (K-1) and n_points
// are multiples of P.
//
// A helper of data_fetch_mult; its protocol and the credit limit are this
// design's own choices.
module fetch_port
  import fp32_pkg::*;
  import ftc_pkg::*;
#(
  parameter int P     = 4,
  parameter int DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,        // begin a pass (pulse)
  input  logic [AW-1:0]        base,
  input  logic [31:0]          chunk_stride, // points between chunk starts
  input  logic signed [31:0]   offset,       // point index of chunk 0, word 0
  input  logic                 check_range,
  input  logic [31:0]          n_points,
  input  logic [31:0]          n_chunks,
  input  logic [31:0]          words,        // words per chunk
  output logic                 busy,         // requests still to be issued
  output logic                 req_valid,
  input  logic                 req_ready,
  output logic [AW-1:0]        req_addr,
  input  logic                 resp_valid,
  input  logic [P*64-1:0]      resp_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic                 out_zero,
  output cplx_t [P-1:0]        out_data
);
  localparam int CW = $clog2(DEPTH) + 1;

  logic [31:0]        c_q, w_q;
  logic signed [31:0] g_chunk_q, g;
  logic [CW-1:0]      credit_q;   // words requested or stored, not yet delivered
  logic               zero_w, issue_slot, issue_req, issue_zero;

  assign g          = g_chunk_q + $signed(w_q * P);
  assign zero_w     = check_range && (g < 0 || g >= $signed(n_points));
  assign issue_slot = busy && credit_q < CW'(DEPTH);
  assign req_valid  = issue_slot && !zero_w;
  assign req_addr   = base + AW'(2 * g);
  assign issue_req  = req_valid && req_ready;
  assign issue_zero = issue_slot && zero_w;

  logic advance;
  assign advance = issue_req || issue_zero;

  // in-order tags: one per issued word, 1 = zero word
  logic tag_valid, tag_zero, tag_in_ready;
  logic data_valid, data_in_ready;
  logic [P*64-1:0] data_word;
  logic pop;
  logic [CW-1:0] tag_cnt_unused, data_cnt_unused;

  chan_fifo #(.W(1), .DEPTH(DEPTH)) u_tag (
    .clk, .rst_n,
    .in_valid(advance), .in_ready(tag_in_ready), .in_data(zero_w),
    .out_valid(tag_valid), .out_ready(pop), .out_data(tag_zero),
    .count(tag_cnt_unused)
  );

  chan_fifo #(.W(P*64), .DEPTH(DEPTH)) u_data (
    .clk, .rst_n,
    .in_valid(resp_valid), .in_ready(data_in_ready), .in_data(resp_data),
    .out_valid(data_valid), .out_ready(pop && !tag_zero), .out_data(data_word),
    .count(data_cnt_unused)
  );

  assign out_valid = tag_valid && (tag_zero || data_valid);
  assign out_zero  = tag_zero;
  assign out_data  = tag_zero ? '0 : data_word;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      c_q       <= '0;
      w_q       <= '0;
      g_chunk_q <= '0;
      credit_q  <= '0;
    end else begin
      credit_q <= credit_q + CW'(advance) - CW'(pop);
      if (start) begin
        busy      <= (n_chunks != 0);
        c_q       <= '0;
        w_q       <= '0;
        g_chunk_q <= offset;
      end else if (advance) begin
        if (w_q == words - 1) begin
          w_q       <= '0;
          c_q       <= c_q + 1;
          g_chunk_q <= g_chunk_q + $signed(chunk_stride);
          if (c_q == n_chunks - 1) busy <= 1'b0;
        end else begin
          w_q <= w_q + 1;
        end
      end
    end
  end

  a_resp_room : assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid |-> data_in_ready);
  a_tag_room : assert property (@(posedge clk) disable iff (!rst_n)
    advance |-> tag_in_ready);

endmodule
