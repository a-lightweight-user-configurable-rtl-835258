// scrambler_64b66b: self-synchronous 64B/66B payload scrambler, G(x) = 1 + x^39 + x^58.
//
// Scrambles the 64-bit payload of one block per enabled clock, bit 0 first
// (bit 0 is sent first on the line): s_i = d_i ^ s_(i-39) ^ s_(i-58), where s
// are previously scrambled bits. The 58 most recent scrambled bits are kept
// as state; the sync header is not scrambled and is not seen here. Output is
// combinational from the input and the state; the state advances on clk when
// en is high. The paper lists 16 64B/66B scramblers in its link-layer block;
// the polynomial is the standard one of 64B/66B line coding (as used by
// Aurora 64B/66B), not stated in the paper. Reset state is all ones.
module scrambler_64b66b (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [63:0] din,
  output logic [63:0] dout
);
  logic [57:0] state, st;   // state[k] = scrambled bit sent k+1 bits ago

  always_comb begin
    st = state;
    for (int i = 0; i < 64; i++) begin
      dout[i] = din[i] ^ st[38] ^ st[57];
      st      = {st[56:0], dout[i]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state <= '1;
    else if (en) state <= st;
  end
endmodule
