// poisson_sqrt: single-cycle integer square root for Poisson encoding.
//
// Computes S = floor(sqrt(N)) or, with round_en, S = round(sqrt(N)) for a
// B-bit unsigned N, using only shifts, adds, subtracts and compares. It is an
// unrolled copy of the digit-by-digit algorithm of the paper (Algorithm 1):
// D holds the remainder N - R^2, C holds the helper 2^n * R_n; for each result
// bit n from m-1 down to 0, if D >= C + 4^n the bit is set. Rounding adds one
// when the remainder exceeds the root (D_0 > C_-1), i.e. when the next binary
// digit after the radix point would be 1. The root needs ceil(B/2) bits, one
// more when rounding (round(sqrt(1023)) = 32), so the output is m+1 bits.
// Combinational; the paper's 130 nm 10-bit instance is single cycle too.
module poisson_sqrt #(
  parameter int unsigned B = detector_pkg::PIX_W
) (
  input  logic [B-1:0]          n,
  input  logic                  round_en,
  output logic [(B+1)/2:0]      s
);
  localparam int unsigned M  = (B + 1) / 2;  // ceil(B/2)
  localparam int unsigned DW = 2 * M + 1;    // room for C + 4^n

  logic [DW-1:0] d, c, t;

  always_comb begin
    d = DW'(n);
    c = '0;
    for (int k = int'(M) - 1; k >= 0; k--) begin
      t = c + (DW'(1) << (2 * k));
      if (d >= t) begin
        d = d - t;
        c = (c >> 1) + (DW'(1) << (2 * k));
      end else begin
        c = c >> 1;
      end
    end
    if (round_en && d > c) s = (M+1)'(c + 1'b1);
    else                   s = (M+1)'(c);
  end
endmodule
