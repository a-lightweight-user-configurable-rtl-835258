// async_fifo: wide asynchronous FIFO between the core (write) clock and the
// link (read) clock, DEPTH words of W bits held in flip-flops.
//
// Classic dual-clock design: binary pointers one bit wider than the address,
// converted to Gray code and passed through two-flop synchronizers into the
// other domain. full/empty are derived by each side from its own pointer and
// the synchronized Gray pointer of the other side, so they are pessimistic
// (never wrong in the unsafe direction). Reads are first-word-fall-through:
// rdata shows the head word whenever empty is low, rd_en pops it.
// A write while full is dropped and reported on wr_overflow (one pulse in the
// write domain) and by toggling ovf_toggle, which the link layer synchronizes
// to send a FIFO-overflow message. The word width equal to all serializer
// lanes together (1024 bits) and the 16-word register storage follow the
// paper's example; the pointer scheme and overflow reporting are this
// design's choices.
module async_fifo #(
  parameter int unsigned W     = detector_pkg::FIFO_W,
  parameter int unsigned DEPTH = detector_pkg::FIFO_DEPTH
) (
  input  logic          wclk,
  input  logic          wrst_n,
  input  logic          wr_en,
  input  logic [W-1:0]  wdata,
  output logic          full,
  output logic          wr_overflow,
  output logic          ovf_toggle,
  input  logic          rclk,
  input  logic          rrst_n,
  input  logic          rd_en,
  output logic [W-1:0]  rdata,
  output logic          empty
);
  localparam int unsigned AW = $clog2(DEPTH);
  initial assert (DEPTH == (1 << AW)) else $error("DEPTH must be a power of two");

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr, wgray, rptr, rgray;
  logic [AW:0]   rgray_w1, rgray_w2;   // read pointer in write domain
  logic [AW:0]   wgray_r1, wgray_r2;   // write pointer in read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain ----------------
  logic [AW:0] wptr_n;
  assign wptr_n = wptr + 1'b1;
  assign full   = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wptr        <= '0;
      wgray       <= '0;
      rgray_w1    <= '0;
      rgray_w2    <= '0;
      wr_overflow <= 1'b0;
      ovf_toggle  <= 1'b0;
    end else begin
      rgray_w1    <= rgray;
      rgray_w2    <= rgray_w1;
      wr_overflow <= wr_en && full;
      if (wr_en && full) ovf_toggle <= ~ovf_toggle;
      if (wr_en && !full) begin
        wptr  <= wptr_n;
        wgray <= bin2gray(wptr_n);
      end
    end
  end

  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wptr[AW-1:0]] <= wdata;
  end

  // ---------------- read domain ----------------
  logic [AW:0] rptr_n;
  assign rptr_n = rptr + 1'b1;
  assign empty  = (rgray == wgray_r2);
  assign rdata  = mem[rptr[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rptr     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !empty) begin
        rptr  <= rptr_n;
        rgray <= bin2gray(rptr_n);
      end
      // a read of an empty FIFO is ignored, but it is a controller error
      a_no_read_empty: assert (!(rd_en && empty)) else $error("read while empty");
    end
  end
endmodule
