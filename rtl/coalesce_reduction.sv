// coalesce_reduction: reduction stage of the coalescing logic.
//
// Takes the constant-size metadata (one bit-width per compressor) and the
// variable-length bit-plane lists of NCOMP parallel compressors and makes one
// contiguous variable-length list of WORD_W-bit words:
//   word 0            : metadata, bw of compressor c in bits [c*BW_W +: BW_W]
//   words 1 ..        : planes 0..bw0-1 of compressor 0, then compressor 1, ...
// so out_len = 1 + sum(bw). The lists are joined by a binary tree of
// coalesce_merger nodes (pairs of compressors, then pairs of pairs), and the
// metadata word is put in front last, the arrangement of the paper's
// coalescing figure. When in_valid is low the output is empty (out_len = 0).
// Entirely combinational, as in the paper.
module coalesce_reduction #(
  parameter int unsigned NCOMP = detector_pkg::NCOMP,
  parameter int unsigned PIX_W = detector_pkg::PIX_W,
  parameter int unsigned W     = detector_pkg::WORD_W,
  parameter int unsigned BW_W  = $clog2(PIX_W + 1),
  parameter int unsigned MAXW  = 1 + NCOMP * PIX_W,
  parameter int unsigned LW    = $clog2(MAXW + 1)
) (
  input  logic                                   in_valid,
  input  logic [NCOMP-1:0][BW_W-1:0]             bw,
  input  logic [NCOMP-1:0][PIX_W-1:0][W-1:0]     plane,
  output logic [MAXW*W-1:0]                      out_data,
  output logic [LW-1:0]                          out_len
);
  localparam int unsigned LOG = $clog2(NCOMP);

  initial begin
    assert (NCOMP == (1 << LOG)) else $error("NCOMP must be a power of two");
    assert (NCOMP * BW_W <= W)   else $error("metadata does not fit one word");
  end

  for (genvar l = 0; l <= LOG; l++) begin : lv
    localparam int unsigned N   = NCOMP >> l;
    localparam int unsigned NW  = PIX_W << l;
    localparam int unsigned NLW = $clog2(NW + 1);
    logic [N-1:0][NW*W-1:0] d;
    logic [N-1:0][NLW-1:0]  len;
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < N; i++) begin : g_c
        assign d[i]   = plane[i];
        assign len[i] = NLW'(bw[i]);
      end
    end else begin : g_node
      for (genvar i = 0; i < N; i++) begin : g_m
        coalesce_merger #(.W(W), .NA(NW/2), .NB(NW/2)) u_m (
          .a(lv[l-1].d[2*i]),   .a_len(lv[l-1].len[2*i]),
          .b(lv[l-1].d[2*i+1]), .b_len(lv[l-1].len[2*i+1]),
          .y(d[i]), .y_len(len[i])
        );
      end
    end
  end

  logic [W-1:0]    meta;
  logic [LW-1:0]   mlen;
  always_comb begin
    meta = '0;
    for (int c = 0; c < NCOMP; c++) meta[c*BW_W +: BW_W] = bw[c];
  end

  coalesce_merger #(.W(W), .NA(1), .NB(NCOMP * PIX_W)) u_meta (
    .a(meta), .a_len(1'b1),
    .b(lv[LOG].d[0]), .b_len(lv[LOG].len[0]),
    .y(out_data), .y_len(mlen)
  );
  assign out_len = in_valid ? mlen : '0;
endmodule
