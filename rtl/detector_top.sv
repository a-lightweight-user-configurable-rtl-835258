// detector_top: digital balcony of the detector ASIC, from the pixel shift
// registers to the 32-bit words of the serial transmitters.
//
// Core clock domain (clk), one column of NROWS = 64 pixels per clock:
//   pixel_array_readout  rows shift a loaded frame out, one column per clock
//   preprocess           crop, background subtraction, 2x2 binning, Poisson
//                        encoding (floor/round) or cube root, all optional
//   dbw_compressor x4    bit shuffle + dynamic bit-width of 16-pixel regions
//                        (region c = rows 16c .. 16c+15 of the column)
//   coalesce_reduction   metadata word + planes of all four, made contiguous
//   coalesce_packing     buffer, emits a 1024-bit word when one is full and
//                        a padded word at each frame end
// async_fifo (16 x 1024 bits) crosses to the link clock domain (link_clk):
//   link_layer           FIFO read controller, IDLE / channel bonding /
//                        overflow blocks, 16 scramblers and 16 gearboxes
// Outputs are the 16 lanes' 32-bit words for the serializers, which, with
// the line drivers, the PLL and the pixel front end, are outside this logic:
// the pixel counts come in on pixel_counts and the link clock on link_clk.
// Nothing stalls on the core side: a FIFO that is full when a word arrives
// drops it, and the loss is reported on fifo_overflow and as an overflow
// message on the link. Each clock domain takes its own, already synchronized
// active-low reset.
// The chain and its sizes follow the paper's 64 x 64, 10-bit test-chip
// example; the configuration port, the frame-load strobe and the frame-end
// flush are this design's.
// The readout's sof, the packer's fill level and the link layer's block kind
// and take strobe are not needed here. They stay as named nets so that a
// testbench can observe them; they drive no logic.
module detector_top
  import detector_pkg::*;
(
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  frame_load,
  input  logic [NROWS-1:0][NCOLS-1:0][PIX_W-1:0] pixel_counts,
  input  pp_cfg_t                               cfg,
  output logic                                  fifo_full,
  output logic                                  fifo_overflow,
  input  logic                                  link_clk,
  input  logic                                  link_rst_n,
  input  logic                                  idle_req,
  input  logic                                  cb_req,
  output logic                                  ser_valid,
  output logic [NLANES-1:0][SER_W-1:0]          ser_word
);
  localparam int unsigned LW = $clog2(MAX_WORDS + 1);

  // ---------------- readout and preprocessing ----------------
  logic                          col_valid, col_sof, col_eof;
  logic [$clog2(NCOLS)-1:0]      col_idx;
  logic [NROWS-1:0][PIX_W-1:0]   col_data, pp_data;
  logic                          pp_valid, pp_eof;

  pixel_array_readout #(.NROWS(NROWS), .NCOLS(NCOLS), .PIX_W(PIX_W)) u_readout (
    .clk(clk), .rst_n(rst_n), .load(frame_load), .counts(pixel_counts),
    .col_valid(col_valid), .col_idx(col_idx), .sof(col_sof), .eof(col_eof), .col_data(col_data)
  );

  preprocess #(.NROWS(NROWS), .NCOLS(NCOLS), .PIX_W(PIX_W)) u_pp (
    .clk(clk), .rst_n(rst_n), .cfg(cfg),
    .in_valid(col_valid), .in_col(col_idx), .in_eof(col_eof), .in_data(col_data),
    .out_valid(pp_valid), .out_eof(pp_eof), .out_data(pp_data)
  );

  // ---------------- lossless compression ----------------
  logic [NCOMP-1:0][BW_W-1:0]               bw;
  logic [NCOMP-1:0][PIX_W-1:0][WORD_W-1:0]  plane;

  for (genvar c = 0; c < NCOMP; c++) begin : g_comp
    dbw_compressor #(.NPIX(REGION), .PIX_W(PIX_W), .BW_W(BW_W)) u_dbw (
      .pix(pp_data[c*REGION +: REGION]), .plane(plane[c]), .bw(bw[c])
    );
  end

  // ---------------- coalescing ----------------
  logic [MAX_WORDS*WORD_W-1:0]  red_data;
  logic [LW-1:0]                red_len;
  logic                         pk_valid;
  logic [FIFO_W-1:0]            pk_data;
  logic [$clog2(FIFO_W/WORD_W)-1:0] pk_level;

  coalesce_reduction #(.NCOMP(NCOMP), .PIX_W(PIX_W), .W(WORD_W)) u_red (
    .in_valid(pp_valid), .bw(bw), .plane(plane), .out_data(red_data), .out_len(red_len)
  );

  coalesce_packing #(.W(WORD_W), .OUTW(FIFO_W/WORD_W), .MAXW(MAX_WORDS)) u_pack (
    .clk(clk), .rst_n(rst_n), .in_data(red_data), .in_len(red_len), .flush(pp_eof),
    .out_valid(pk_valid), .out_data(pk_data), .level(pk_level)
  );

  // ---------------- readout: FIFO and link layer ----------------
  logic              ovf_toggle, fifo_rd_en, fifo_empty;
  logic [FIFO_W-1:0] fifo_rdata;
  blk_kind_e         blk_kind;
  logic              blk_take;

  async_fifo #(.W(FIFO_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wclk(clk), .wrst_n(rst_n), .wr_en(pk_valid), .wdata(pk_data), .full(fifo_full),
    .wr_overflow(fifo_overflow), .ovf_toggle(ovf_toggle),
    .rclk(link_clk), .rrst_n(link_rst_n), .rd_en(fifo_rd_en), .rdata(fifo_rdata), .empty(fifo_empty)
  );

  link_layer #(.NLANES(NLANES)) u_link (
    .clk(link_clk), .rst_n(link_rst_n),
    .fifo_rdata(fifo_rdata), .fifo_empty(fifo_empty), .fifo_rd_en(fifo_rd_en),
    .idle_req(idle_req), .cb_req(cb_req), .ovf_toggle(ovf_toggle),
    .ser_valid(ser_valid), .ser_word(ser_word), .blk_kind(blk_kind), .blk_take(blk_take)
  );

  initial assert (NLANES * LANE_W == FIFO_W) else $error("FIFO word must fill all lanes once");
endmodule
