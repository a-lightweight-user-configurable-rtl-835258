// pp_binning: optional 2 x 2 binning of neighbouring pixels, one register stage.
//
// Disabled, the stage is a plain pipeline register for data, valid and eof.
// Enabled, it adds pairs of rows (2j, 2j+1) within a column and pairs of
// consecutive valid columns, so 2 x 2 pixels become one binned pixel
// saturated to PIX_W bits. Two binned columns of NROWS/2 pixels are gathered
// and sent as one NROWS-wide vector: out[j] = binned column A row j and
// out[NROWS/2 + j] = binned column B row j. One output thus follows every
// four valid input columns. At eof a partly filled group is flushed with the
// missing half-columns taken as zero, so no frame data is held back.
// Timing: output registered, one clock after the input that completes a group.
// The paper names binning as a user option; the 2 x 2 shape, the summing with
// saturation and the output arrangement are this design's choices.
module pp_binning #(
  parameter int unsigned NROWS = detector_pkg::NROWS,
  parameter int unsigned PIX_W = detector_pkg::PIX_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  logic                          in_valid,
  input  logic                          in_eof,
  input  logic [NROWS-1:0][PIX_W-1:0]   in_data,
  output logic                          out_valid,
  output logic                          out_eof,
  output logic [NROWS-1:0][PIX_W-1:0]   out_data
);
  localparam int unsigned NB = NROWS / 2;
  localparam logic [PIX_W+1:0] PMAX = {2'b00, {PIX_W{1'b1}}};

  logic [1:0]                      ph, ph_n;
  logic [NB-1:0][PIX_W:0]          acc, acc_n;      // row-pair sums of a first column
  logic [NB-1:0][PIX_W-1:0]        col_a, col_a_n;  // finished binned column A
  logic [NB-1:0][PIX_W:0]          rowsum;
  logic                            emit;
  logic [NROWS-1:0][PIX_W-1:0]     vec;

  function automatic logic [PIX_W-1:0] sat(input logic [PIX_W+1:0] v);
    return (v > PMAX) ? {PIX_W{1'b1}} : v[PIX_W-1:0];
  endfunction

  always_comb begin
    for (int j = 0; j < NB; j++)
      rowsum[j] = {1'b0, in_data[2*j]} + {1'b0, in_data[2*j+1]};
    ph_n    = ph;
    acc_n   = acc;
    col_a_n = col_a;
    emit    = 1'b0;
    vec     = '0;
    if (in_valid) begin
      ph_n = ph + 2'd1;
      unique case (ph)
        2'd0, 2'd2: acc_n = rowsum;
        2'd1: for (int j = 0; j < NB; j++) col_a_n[j] = sat({1'b0, acc[j]} + {1'b0, rowsum[j]});
        2'd3: begin
          emit = 1'b1;
          for (int j = 0; j < NB; j++) begin
            vec[j]      = col_a[j];
            vec[NB + j] = sat({1'b0, acc[j]} + {1'b0, rowsum[j]});
          end
        end
      endcase
    end
    if (in_eof && ph_n != 2'd0) begin
      emit = 1'b1;
      for (int j = 0; j < NB; j++) begin
        vec[j]      = (ph_n == 2'd1) ? sat({1'b0, acc_n[j]}) : col_a_n[j];
        vec[NB + j] = (ph_n == 2'd3) ? sat({1'b0, acc_n[j]}) : '0;
      end
      ph_n = 2'd0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph        <= '0;
      acc       <= '0;
      col_a     <= '0;
      out_valid <= 1'b0;
      out_eof   <= 1'b0;
      out_data  <= '0;
    end else if (!en) begin
      ph        <= '0;
      out_valid <= in_valid;
      out_eof   <= in_eof;
      out_data  <= in_data;
    end else begin
      ph        <= ph_n;
      acc       <= acc_n;
      col_a     <= col_a_n;
      out_valid <= emit;
      out_eof   <= in_eof;
      out_data  <= vec;
    end
  end
endmodule
