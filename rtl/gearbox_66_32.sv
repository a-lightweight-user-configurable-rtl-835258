// gearbox_66_32: converts 66-bit 64B/66B blocks into 32-bit serializer words.
//
// A bit buffer holds up to 97 bits. Each clock, when at least 32 bits are held
// the lowest 32 go to the serializer (out_valid). If fewer than 32 bits then
// remain, the gearbox takes a new block in the same clock (take = 1) and
// appends it behind them. Steady state: a block every other clock, with one
// extra pause every 32 blocks (66 words carry 32 blocks), so the block source
// sees take as its request and must present a block whenever take is high.
// out_valid is low only in the first clock after reset. Bit 0 of blk (sync
// header bit 0) is the first bit of the serial stream. The paper lists one
// gearbox per lane; this buffer-and-threshold structure is this design's.
module gearbox_66_32 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [65:0] blk,
  output logic        take,
  output logic        out_valid,
  output logic [31:0] out_word
);
  localparam int unsigned BW = 98;
  logic [BW-1:0] buf_q, rest, nxt;
  logic [6:0]    cnt_q, rem;

  always_comb begin
    out_valid = (cnt_q >= 7'd32);
    out_word  = buf_q[31:0];
    rest      = out_valid ? (buf_q >> 32) : buf_q;
    rem       = out_valid ? (cnt_q - 7'd32) : cnt_q;
    take      = (rem < 7'd32);
    nxt       = rest;
    if (take) nxt = rest | (BW'(blk) << rem);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0;
      cnt_q <= '0;
    end else begin
      buf_q <= nxt;
      cnt_q <= take ? rem + 7'd66 : rem;
    end
  end
endmodule
