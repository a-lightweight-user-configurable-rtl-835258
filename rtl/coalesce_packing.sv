// coalesce_packing: packing stage of the coalescing logic.
//
// Collects the variable-length word lists from the reduction stage across
// clock cycles and emits fixed OUTW-word (1024-bit) words for the FIFO. The
// only state is the Buffer of old data (up to OUTW-1 words) and its fill
// level. Each cycle a merger appends the new list behind the buffered words;
// if the total reaches OUTW words, the lowest OUTW words go out and the
// remainder is kept (the Mux picks remainder or full merge for the Buffer).
// Because a cycle adds at most MAXW < OUTW words, at most one word leaves per
// cycle and the stage never stalls.
// Frame end (flush): the words still buffered after the last input of a frame
// are sent as one zero-padded word, so that every frame starts on a word
// boundary and none of it waits for the next frame. If the flush cycle also
// fills a whole word, the padded remainder follows in the next cycle and that
// cycle's new input starts the fresh buffer. The flush is this design's
// addition; the paper does not discuss frame ends.
// Timing: out_valid/out_data are combinational from the inputs and the buffer
// (as in the paper, only the buffer is clocked); the FIFO registers them.
// The remainder after a full word is formed at the full merged width; only
// its low BUFW words can be non-zero, so the upper words are left unused.
module coalesce_packing #(
  parameter int unsigned W     = detector_pkg::WORD_W,
  parameter int unsigned OUTW  = detector_pkg::FIFO_W / detector_pkg::WORD_W,
  parameter int unsigned MAXW  = detector_pkg::MAX_WORDS,
  parameter int unsigned LW    = $clog2(MAXW + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [MAXW*W-1:0]    in_data,
  input  logic [LW-1:0]        in_len,
  input  logic                 flush,
  output logic                 out_valid,
  output logic [OUTW*W-1:0]    out_data,
  output logic [$clog2(OUTW)-1:0] level
);
  localparam int unsigned BUFW = OUTW - 1;            // words held at most
  localparam int unsigned MW   = BUFW + MAXW;         // merged list length
  localparam int unsigned BLW  = $clog2(OUTW);
  localparam int unsigned TW   = $clog2(MW + 1);

  initial assert (MAXW < OUTW) else $error("packing needs MAXW < OUTW to stay stall-free");

  logic [BUFW*W-1:0] buffer, buffer_n;
  logic [BLW-1:0]    blen, blen_n;
  logic              pend, pend_n;        // padded remainder still to send

  logic [MAXW*W-1:0] in_m;
  logic [MW*W-1:0]   merged;
  logic [TW-1:0]     total;
  logic [MW*W-1:0]   rem;

  always_comb begin
    for (int i = 0; i < MAXW; i++)
      in_m[i*W +: W] = (i < int'(in_len)) ? in_data[i*W +: W] : '0;
  end

  coalesce_merger #(.W(W), .NA(BUFW), .NB(MAXW), .LAW(BLW), .LBW(LW), .LOW(TW)) u_merge (
    .a(buffer), .a_len(blen), .b(in_m), .b_len(in_len), .y(merged), .y_len(total)
  );

  always_comb begin
    out_valid = 1'b0;
    out_data  = merged[OUTW*W-1:0];
    buffer_n  = buffer;
    blen_n    = blen;
    pend_n    = 1'b0;
    rem       = '0;
    if (pend) begin
      out_valid = 1'b1;
      out_data  = {{W{1'b0}}, buffer};
      buffer_n  = (BUFW*W)'(in_m);
      blen_n    = BLW'(in_len);
      pend_n    = flush && (in_len != '0);
    end else if (total >= TW'(OUTW)) begin
      out_valid = 1'b1;
      rem       = merged >> (OUTW*W);
      buffer_n  = rem[BUFW*W-1:0];
      blen_n    = BLW'(total - TW'(OUTW));
      pend_n    = flush && (total != TW'(OUTW));
    end else if (flush && total != '0) begin
      out_valid = 1'b1;
      buffer_n  = '0;
      blen_n    = '0;
    end else begin
      buffer_n  = merged[BUFW*W-1:0];
      blen_n    = BLW'(total);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buffer <= '0;
      blen   <= '0;
      pend   <= 1'b0;
    end else begin
      buffer <= buffer_n;
      blen   <= blen_n;
      pend   <= pend_n;
    end
  end
  assign level = blen;
endmodule
