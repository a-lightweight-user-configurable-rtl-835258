// dbw_compressor: bit shuffling plus dynamic bit-width zero suppression for
// one region of NPIX pixels (16 pixels of 10 bits by default).
//
// Bit shuffling is wiring only: output plane k collects bit k of every pixel
// (plane[k][i] = pix[i][k]), so low-count regions leave the upper planes all
// zero. Each plane is tested for "not equal to 0" and a count-leading-zeros
// over those flags gives the bit-width bw = PIX_W - clz, the number of the
// lowest planes that carry information (0 when the whole region is zero).
// Planes at or above bw are guaranteed zero and are dropped by the coalescing
// stage; planes 0 .. bw-1 are the region's variable-length payload, lowest
// plane first. Combinational. This is the structure of the paper's
// compressor figure; the plane order in the stream is this design's choice.
module dbw_compressor #(
  parameter int unsigned NPIX  = detector_pkg::REGION,
  parameter int unsigned PIX_W = detector_pkg::PIX_W,
  parameter int unsigned BW_W  = $clog2(PIX_W + 1)
) (
  input  logic [NPIX-1:0][PIX_W-1:0]  pix,
  output logic [PIX_W-1:0][NPIX-1:0]  plane,
  output logic [BW_W-1:0]             bw
);
  logic [PIX_W-1:0] nz;

  always_comb begin
    for (int k = 0; k < PIX_W; k++) begin
      for (int i = 0; i < NPIX; i++) plane[k][i] = pix[i][k];
      nz[k] = |plane[k];
    end
  end

  // PIX_W - count_leading_zeros(nz): position of the highest non-zero plane + 1
  always_comb begin
    bw = '0;
    for (int k = 0; k < PIX_W; k++) begin
      if (nz[k]) bw = BW_W'(k + 1);
    end
  end
endmodule
