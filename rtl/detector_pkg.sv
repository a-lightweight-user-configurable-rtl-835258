// detector_pkg: sizes, configuration types and link-layer code points shared by
// the detector balcony logic.
//
// The default geometry is the 130 nm test chip: a 64 x 64 array of 10-bit
// pixels, 64 pixels per clock into four 16-pixel dynamic bit-width
// compressors, 1024-bit words into a 16-word FIFO, and a 16-lane link with
// 64B/66B blocks and 32-bit serializer words. The configuration struct and the
// control block encodings are choices of this design; the block type values
// follow the Aurora 64B/66B convention as commonly documented and should be
// checked against the protocol specification before use with a real receiver.
// Each constant is used by the modules that import the package; linting the
// package on its own reports them as unused.
package detector_pkg;

  // ---------------- geometry ----------------
  localparam int unsigned NROWS       = 64;   // pixel rows (one shift bus each)
  localparam int unsigned NCOLS       = 64;   // pixel columns (clocks per frame)
  localparam int unsigned PIX_W       = 10;   // bits per pixel
  localparam int unsigned REGION      = 16;   // pixels per compressor region
  localparam int unsigned NCOMP       = NROWS / REGION;       // parallel compressors
  localparam int unsigned BW_W        = $clog2(PIX_W + 1);    // bit-width field (4)
  localparam int unsigned WORD_W      = REGION;               // one bit plane = 16 bits
  localparam int unsigned MAX_WORDS   = 1 + NCOMP * PIX_W;    // metadata word + planes
  localparam int unsigned FIFO_W      = 1024; // packed output word
  localparam int unsigned FIFO_DEPTH  = 16;
  localparam int unsigned NLANES      = 16;
  localparam int unsigned LANE_W      = 64;   // 64B/66B payload
  localparam int unsigned SER_W       = 32;   // serializer parallel width

  // ---------------- preprocessing configuration ----------------
  typedef enum logic [1:0] {
    Q_NONE       = 2'd0,   // raw counts
    Q_SQRT_FLOOR = 2'd1,   // Poisson encoding, R = floor(sqrt(N))
    Q_SQRT_ROUND = 2'd2,   // Poisson encoding, R = round(sqrt(N))
    Q_CUBE_ROOT  = 2'd3    // floor(cbrt(N))
  } quant_e;

  typedef struct packed {
    logic                       crop_en;
    logic [$clog2(NCOLS)-1:0]   crop_col_lo;  // first kept column
    logic [$clog2(NCOLS)-1:0]   crop_col_hi;  // last kept column
    logic [$clog2(NROWS)-1:0]   crop_row_lo;  // first kept row
    logic [$clog2(NROWS)-1:0]   crop_row_hi;  // last kept row
    logic                       bg_en;
    logic [PIX_W-1:0]           bg_level;     // subtracted from every pixel
    logic                       bin_en;       // 2 x 2 binning
    quant_e                     quant;
  } pp_cfg_t;

  // ---------------- 64B/66B link layer ----------------
  // A 66-bit block is {payload[63:0], sync[1:0]}, bit 0 sent first.
  // Data blocks are sent as "01" (sync[0]=0, sync[1]=1), control blocks as "10".
  localparam logic [1:0] SYNC_DATA = 2'b10;
  localparam logic [1:0] SYNC_CTRL = 2'b01;
  localparam logic [7:0] BTF_IDLE  = 8'h78;  // idle / channel-bonding block type
  localparam logic [7:0] BTF_UK0   = 8'hD2;  // user K-block 0: FIFO overflow message
  localparam int unsigned CB_BIT   = 8;      // payload bit flagging channel bonding in an idle block

  typedef enum logic [1:0] {
    BLK_IDLE = 2'd0,
    BLK_CB   = 2'd1,
    BLK_OVF  = 2'd2,
    BLK_DATA = 2'd3
  } blk_kind_e;

endpackage
