// pixel_array_readout: the digital shift-out path of the pixel matrix.
//
// Each of the NROWS rows is a shift register of NCOLS pixel values. A
// load pulse copies a whole frame of counter values (from the pixel front
// end) into the registers; on every following clock the rows shift one place
// towards the balcony, so column 0, then 1, ... NCOLS-1 appears at the output,
// one column of NROWS pixels per clock. A frame therefore leaves in NCOLS
// clocks. A new load may coincide with the last column of the previous frame,
// which gives gap-free continuous readout; a load earlier than that restarts
// the readout and the rest of the old frame is lost (this design's choice).
//
// Interface: load (pulse) + counts[row][col]; out: col_valid, col_idx,
// sof (first column) and eof (last column) strobes, col_data[row].
// Timing: the first column is valid in the clock after the load.
// The paper gives the function (rows are parallel shift registers that stream
// a frame to the edge in one frame interval); the load/strobe handshake is
// this design's own.
module pixel_array_readout #(
  parameter int unsigned NROWS = detector_pkg::NROWS,
  parameter int unsigned NCOLS = detector_pkg::NCOLS,
  parameter int unsigned PIX_W = detector_pkg::PIX_W
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  logic                                      load,
  input  logic [NROWS-1:0][NCOLS-1:0][PIX_W-1:0]    counts,
  output logic                                      col_valid,
  output logic [$clog2(NCOLS)-1:0]                  col_idx,
  output logic                                      sof,
  output logic                                      eof,
  output logic [NROWS-1:0][PIX_W-1:0]               col_data
);
  logic [NROWS-1:0][NCOLS-1:0][PIX_W-1:0] sr;
  logic [$clog2(NCOLS)-1:0]               cnt;
  logic                                   busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      for (int r = 0; r < NROWS; r++) sr[r] <= '0;
    end else if (load) begin
      sr   <= counts;
      cnt  <= '0;
      busy <= 1'b1;
    end else if (busy) begin
      for (int r = 0; r < NROWS; r++) begin
        for (int c = 0; c < NCOLS - 1; c++) sr[r][c] <= sr[r][c+1];
        sr[r][NCOLS-1] <= '0;
      end
      cnt <= cnt + 1'b1;
      if (cnt == $clog2(NCOLS)'(NCOLS - 1)) busy <= 1'b0;
    end
  end

  always_comb begin
    for (int r = 0; r < NROWS; r++) col_data[r] = sr[r][0];
  end
  assign col_valid = busy;
  assign col_idx   = cnt;
  assign sof       = busy && (cnt == '0);
  assign eof       = busy && (cnt == $clog2(NCOLS)'(NCOLS - 1));
endmodule
