// pp_background: parasitic background correction.
//
// Subtracts one user-set background level from every pixel, clamping at zero,
// so that air or sample-environment scatter is removed before Poisson encoding.
// Combinational, one subtractor per pixel lane. The paper asks for the
// background to be subtracted before Poisson encoding but does not say how it
// is represented; a single global level is this design's simplest choice.
module pp_background #(
  parameter int unsigned NPIX  = detector_pkg::NROWS,
  parameter int unsigned PIX_W = detector_pkg::PIX_W
) (
  input  logic                        en,
  input  logic [PIX_W-1:0]            level,
  input  logic [NPIX-1:0][PIX_W-1:0]  in_data,
  output logic [NPIX-1:0][PIX_W-1:0]  out_data
);
  always_comb begin
    for (int i = 0; i < NPIX; i++) begin
      if (!en)                      out_data[i] = in_data[i];
      else if (in_data[i] > level)  out_data[i] = in_data[i] - level;
      else                          out_data[i] = '0;
    end
  end
endmodule
