// preprocess: the optional lossy preprocessing stage of the balcony.
//
// One column of NROWS pixels enters per clock. The user options are applied
// in this order: cropping (pp_crop), parasitic background subtraction
// (pp_background), 2 x 2 binning (pp_binning, the only registered step) and
// finally one quantiser per pixel lane, chosen by cfg.quant: none, Poisson
// encoding with floor or rounding (poisson_sqrt, one per lane, 64 in all as in
// the paper's area estimate), or a cube root (cube_root). Each option is
// independently enabled. Background correction ahead of Poisson encoding
// follows the paper; the place of cropping and binning in the chain and the
// single quantiser selector (square root and cube root are alternatives) are
// this design's choices.
// Timing: one clock of latency (the binning register); with binning enabled
// one output vector follows every four kept columns.
module preprocess #(
  parameter int unsigned NROWS = detector_pkg::NROWS,
  parameter int unsigned NCOLS = detector_pkg::NCOLS,
  parameter int unsigned PIX_W = detector_pkg::PIX_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  detector_pkg::pp_cfg_t         cfg,
  input  logic                          in_valid,
  input  logic [$clog2(NCOLS)-1:0]      in_col,
  input  logic                          in_eof,
  input  logic [NROWS-1:0][PIX_W-1:0]   in_data,
  output logic                          out_valid,
  output logic                          out_eof,
  output logic [NROWS-1:0][PIX_W-1:0]   out_data
);
  import detector_pkg::*;
  localparam int unsigned SW = (PIX_W + 1) / 2 + 1;
  localparam int unsigned CW = $clog2(PIX_W * PIX_W);

  logic                          crop_valid;
  logic [NROWS-1:0][PIX_W-1:0]   crop_data, bg_data, bin_data;

  pp_crop #(.NROWS(NROWS), .NCOLS(NCOLS), .PIX_W(PIX_W)) u_crop (
    .en(cfg.crop_en),
    .col_lo(cfg.crop_col_lo[$clog2(NCOLS)-1:0]), .col_hi(cfg.crop_col_hi[$clog2(NCOLS)-1:0]),
    .row_lo(cfg.crop_row_lo[$clog2(NROWS)-1:0]), .row_hi(cfg.crop_row_hi[$clog2(NROWS)-1:0]),
    .in_valid(in_valid), .in_col(in_col), .in_data(in_data),
    .out_valid(crop_valid), .out_data(crop_data)
  );

  pp_background #(.NPIX(NROWS), .PIX_W(PIX_W)) u_bg (
    .en(cfg.bg_en), .level(cfg.bg_level[PIX_W-1:0]),
    .in_data(crop_data), .out_data(bg_data)
  );

  pp_binning #(.NROWS(NROWS), .PIX_W(PIX_W)) u_bin (
    .clk(clk), .rst_n(rst_n), .en(cfg.bin_en),
    .in_valid(crop_valid), .in_eof(in_eof), .in_data(bg_data),
    .out_valid(out_valid), .out_eof(out_eof), .out_data(bin_data)
  );

  for (genvar i = 0; i < NROWS; i++) begin : g_quant
    logic [SW-1:0] sq;
    logic [CW-1:0] cb;
    poisson_sqrt #(.B(PIX_W)) u_sqrt (
      .n(bin_data[i]), .round_en(cfg.quant == Q_SQRT_ROUND), .s(sq)
    );
    cube_root #(.B(PIX_W)) u_cbrt (.n(bin_data[i]), .r(cb));
    always_comb begin
      unique case (cfg.quant)
        Q_SQRT_FLOOR, Q_SQRT_ROUND: out_data[i] = PIX_W'(sq);
        Q_CUBE_ROOT:                out_data[i] = PIX_W'(cb);
        default:                    out_data[i] = bin_data[i];
      endcase
    end
  end
endmodule
