// cube_root: integer cube root quantiser, floor(cbrt(N)) of a B-bit value.
//
// The result is the number of integers k >= 1 with k^3 <= N, found with one
// constant comparator per candidate k (10 comparators for B = 10, since
// 11^3 > 1023). Combinational. The paper only names a cube root among the
// user-selectable preprocessing options; the floor rounding and the
// comparator structure are this design's choices.
module cube_root #(
  parameter int unsigned B = detector_pkg::PIX_W
) (
  input  logic [B-1:0]            n,
  output logic [$clog2(B*B)-1:0]  r
);
  // Largest possible root, floor(cbrt(2^B - 1)); 2^(B/3+1) bounds it.
  localparam int unsigned KMAX = 1 << ((B + 2) / 3);
  localparam int unsigned RW   = $clog2(B * B);

  always_comb begin
    r = '0;
    for (int unsigned k = 1; k <= KMAX; k++) begin
      if ((64'(k) * 64'(k) * 64'(k)) <= 64'(n)) r = RW'(k);
    end
  end
endmodule
