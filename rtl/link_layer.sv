// link_layer: Aurora-style 64B/66B link layer driving NLANES bonded serial lanes.
//
// Holds the FIFO read controller, one scrambler and one gearbox per lane. All
// lanes run in lockstep, so every block slot (gearbox take) is filled on all
// lanes at once with one kind of block:
//   - a channel-bonding block, once per cb_req pulse (external control);
//   - a FIFO-overflow user message, once per overflow reported by the FIFO
//     (ovf_toggle from the write clock domain, synchronized here);
//   - an IDLE block while idle_req is high or the FIFO is empty;
//   - otherwise a data block: the FIFO head word is popped and lane i carries
//     its bits [64*i +: 64], so one 1024-bit FIFO word fills all 16 lanes once.
// Priority is in that order. Payloads are scrambled, sync headers are not.
// No flow control is taken from the receiver, as the paper requires.
// Interface: FWFT FIFO read side (fifo_rdata/fifo_empty/fifo_rd_en), one
// 32-bit word per lane per clock to the serializers (ser_valid low only just
// after reset). Block kinds and code points: see detector_pkg. The block
// contents (FIFO controller, scramblers, gearboxes, IDLE and channel bonding
// under external control, overflow message) follow the paper; the control
// block layout is this design's reading of the Aurora convention.
module link_layer #(
  parameter int unsigned NLANES = detector_pkg::NLANES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NLANES*64-1:0]          fifo_rdata,
  input  logic                          fifo_empty,
  output logic                          fifo_rd_en,
  input  logic                          idle_req,
  input  logic                          cb_req,
  input  logic                          ovf_toggle,
  output logic                          ser_valid,
  output logic [NLANES-1:0][detector_pkg::SER_W-1:0] ser_word,
  output detector_pkg::blk_kind_e       blk_kind,
  output logic                          blk_take
);
  import detector_pkg::*;
  logic [2:0] ovf_sync;
  logic       ovf_pend, cb_pend;
  logic [NLANES-1:0] take, vld;

  // ---------------- block selection ----------------
  always_comb begin
    if (cb_pend || cb_req)                blk_kind = BLK_CB;
    else if (ovf_pend)                    blk_kind = BLK_OVF;
    else if (idle_req || fifo_empty)      blk_kind = BLK_IDLE;
    else                                  blk_kind = BLK_DATA;
  end
  assign blk_take   = take[0];
  assign fifo_rd_en = blk_take && (blk_kind == BLK_DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ovf_sync <= '0;
      ovf_pend <= 1'b0;
      cb_pend  <= 1'b0;
    end else begin
      ovf_sync <= {ovf_sync[1:0], ovf_toggle};
      if (ovf_sync[2] != ovf_sync[1])                  ovf_pend <= 1'b1;
      else if (blk_take && blk_kind == BLK_OVF)        ovf_pend <= 1'b0;
      if (blk_take && blk_kind == BLK_CB)              cb_pend  <= 1'b0;
      else if (cb_req)                                 cb_pend  <= 1'b1;
      // lanes must stay bonded: identical gearbox phase on every lane
      a_lockstep: assert (take == {NLANES{take[0]}}) else $error("lanes out of step");
    end
  end

  // ---------------- per-lane scrambler and gearbox ----------------
  for (genvar i = 0; i < NLANES; i++) begin : g_lane
    logic [63:0] payload, scr;
    logic [1:0]  sync;
    always_comb begin
      unique case (blk_kind)
        BLK_DATA: begin payload = fifo_rdata[64*i +: 64];            sync = SYNC_DATA; end
        BLK_CB:   begin payload = 64'(BTF_IDLE) | (64'd1 << CB_BIT);  sync = SYNC_CTRL; end
        BLK_OVF:  begin payload = {48'd0, 8'h01, BTF_UK0};           sync = SYNC_CTRL; end
        default:  begin payload = 64'(BTF_IDLE);                      sync = SYNC_CTRL; end
      endcase
    end
    scrambler_64b66b u_scr (.clk(clk), .rst_n(rst_n), .en(take[i]), .din(payload), .dout(scr));
    gearbox_66_32 u_gb (
      .clk(clk), .rst_n(rst_n), .blk({scr, sync}), .take(take[i]),
      .out_valid(vld[i]), .out_word(ser_word[i])
    );
  end
  assign ser_valid = &vld;      // all lanes are in step, so all agree
endmodule
