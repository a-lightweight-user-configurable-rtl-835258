// pp_crop: cropping of the detector edges, first step of preprocessing.
//
// Columns arrive one per clock. When cropping is enabled, a column whose index
// lies outside [col_lo, col_hi] is dropped (its valid is cleared) and pixels
// whose row lies outside [row_lo, row_hi] are forced to zero, which the
// zero-suppressing compressor then reduces to almost nothing. Frame strobes
// (sof/eof) pass unchanged so that downstream stages still see frame edges.
// Purely combinational. The paper names cropping of the detector edge as a
// user option; dropping columns and zeroing rows is this design's choice,
// made because rows are parallel lanes while columns are clock cycles.
module pp_crop #(
  parameter int unsigned NROWS = detector_pkg::NROWS,
  parameter int unsigned NCOLS = detector_pkg::NCOLS,
  parameter int unsigned PIX_W = detector_pkg::PIX_W
) (
  input  logic                          en,
  input  logic [$clog2(NCOLS)-1:0]      col_lo,
  input  logic [$clog2(NCOLS)-1:0]      col_hi,
  input  logic [$clog2(NROWS)-1:0]      row_lo,
  input  logic [$clog2(NROWS)-1:0]      row_hi,
  input  logic                          in_valid,
  input  logic [$clog2(NCOLS)-1:0]      in_col,
  input  logic [NROWS-1:0][PIX_W-1:0]   in_data,
  output logic                          out_valid,
  output logic [NROWS-1:0][PIX_W-1:0]   out_data
);
  always_comb begin
    out_valid = in_valid && (!en || (in_col >= col_lo && in_col <= col_hi));
    for (int r = 0; r < NROWS; r++) begin
      if (en && (r < int'(row_lo) || r > int'(row_hi))) out_data[r] = '0;
      else                                              out_data[r] = in_data[r];
    end
  end
endmodule
