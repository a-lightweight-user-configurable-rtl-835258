// tb_lane_rx: receiver model of one serial lane for testbenches. Collects the
// 32-bit serializer words (bit 0 first), cuts the stream into 66-bit blocks
// (block lock is implicit: the stream is taken from its first bit), and
// descrambles each payload with a bit-serial 1 + x^39 + x^58 descrambler that
// starts, like the transmitter, with all ones. Reports each block for one
// clock on blk_valid with its sync header and plain payload.
module tb_lane_rx (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] in_word,
  output logic        blk_valid,
  output logic [1:0]  blk_sync,
  output logic [63:0] blk_payload
);
  bit          q[$];
  logic [57:0] ds;

  always @(posedge clk) begin
    if (!rst_n) begin
      q = {};
      ds = '1;
      blk_valid <= 1'b0;
    end else begin
      blk_valid <= 1'b0;
      if (in_valid) for (int i = 0; i < 32; i++) q.push_back(in_word[i]);
      if (q.size() >= 66) begin
        logic [65:0] b;
        logic [63:0] p;
        for (int i = 0; i < 66; i++) b[i] = q.pop_front();
        for (int i = 0; i < 64; i++) begin
          p[i] = b[i+2] ^ ds[38] ^ ds[57];
          ds   = {ds[56:0], b[i+2]};
        end
        blk_valid   <= 1'b1;
        blk_sync    <= b[1:0];
        blk_payload <= p;
      end
    end
  end
endmodule
