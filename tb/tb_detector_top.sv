// tb_detector_top: end-to-end test of the whole balcony at its default size
// (64 x 64 10-bit pixels, 4 compressors, 1024-bit words, 16-word FIFO,
// 16 lanes). Frames are loaded into the pixel shift registers, some back to
// back; the 16 lanes' serializer words are captured, each lane is
// de-geared and descrambled (tb_lane_rx), data blocks are put together into
// 1024-bit words, and at the end the word stream is decoded (metadata word,
// then each region's bit planes; each frame starts on a word boundary) and
// compared pixel by pixel with the preprocessing reference model.
// Configurations cover every preprocessing option and their combination.
// Mechanisms counted, each must occur at least once: back-to-back frames,
// every quantiser, background, crop, binning, all-zero regions (bit-width 0),
// full-width regions (bit-width 10), IDLE blocks, a channel-bonding block,
// FIFO full, FIFO overflow with its overflow message on the link. Also
// checks that a frame's 64 columns enter the compressor in 64 clocks.
module tb_detector_top;
  import detector_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, link_clk = 0, link_rst_n = 0;
  logic frame_load = 0, idle_req = 0, cb_req = 0;
  frame_t pixel_counts;
  pp_cfg_t cfg;
  logic fifo_full, fifo_overflow, ser_valid;
  logic [NLANES-1:0][SER_W-1:0] ser_word;

  detector_top dut (
    .clk(clk), .rst_n(rst_n), .frame_load(frame_load), .pixel_counts(pixel_counts), .cfg(cfg),
    .fifo_full(fifo_full), .fifo_overflow(fifo_overflow),
    .link_clk(link_clk), .link_rst_n(link_rst_n), .idle_req(idle_req), .cb_req(cb_req),
    .ser_valid(ser_valid), .ser_word(ser_word));

  always #5 clk = ~clk;
  always #4 link_clk = ~link_clk;

  // ---------------- receiver ----------------
  logic [NLANES-1:0]        rv;
  logic [NLANES-1:0][1:0]   rs;
  logic [NLANES-1:0][63:0]  rp;
  for (genvar i = 0; i < NLANES; i++) begin : g_rx
    tb_lane_rx u_rx (.clk(link_clk), .rst_n(link_rst_n), .in_valid(ser_valid), .in_word(ser_word[i]),
                     .blk_valid(rv[i]), .blk_sync(rs[i]), .blk_payload(rp[i]));
  end

  int checks = 0, failures = 0;
  int n_idle = 0, n_cb = 0, n_ovf_msg = 0, n_data_words = 0, n_full = 0, n_ovf = 0;
  int n_b2b = 0, n_bw0 = 0, n_bw10 = 0, n_two_word_flush = 0, n_cols_clocks_bad = 0;
  int n_cfg[string];
  logic [WORD_W-1:0] stream[$];
  bit capture = 1;

  always @(negedge link_clk) if (link_rst_n && rv[0]) begin
    if (rs[0] == SYNC_DATA) begin
      if (capture) begin
        for (int i = 0; i < NLANES; i++)
          for (int k = 0; k < LANE_W / WORD_W; k++) stream.push_back(rp[i][k*WORD_W +: WORD_W]);
        n_data_words++;
      end
    end else if (rp[0] == 64'(BTF_IDLE))                          n_idle++;
    else if (rp[0] == (64'(BTF_IDLE) | (64'd1 << CB_BIT)))       n_cb++;
    else if (rp[0][7:0] == BTF_UK0)                               n_ovf_msg++;
    else begin failures++; $display("FAIL unknown control block"); end
  end

  always @(posedge clk) if (rst_n) begin
    if (fifo_full) n_full++;
    if (fifo_overflow) n_ovf++;
    if (dut.u_pack.pend) n_two_word_flush++;
    if (dut.u_pp.out_valid)
      for (int c = 0; c < NCOMP; c++) begin
        if (dut.bw[c] == 0)  n_bw0++;
        if (dut.bw[c] == 10) n_bw10++;
      end
  end

  // ---------------- frames ----------------
  typedef struct { vec_t v[$]; } frame_exp_t;
  frame_exp_t sent[$];

  function automatic frame_t make_frame(int kind);
    frame_t f;
    for (int r = 0; r < NROWS; r++)
      for (int c = 0; c < NCOLS; c++) begin
        int d2 = (r - 30) * (r - 30) + (c - 34) * (c - 34);
        int v;
        case (kind)
          0: v = (d2 < 40) ? 900 - 20 * d2 + int'($urandom_range(0, 30)) : (d2 < 200 ? int'($urandom_range(0, 20)) : int'($urandom_range(0, 1)));
          1: v = int'($urandom_range(0, 1023));
          2: v = 0;
          default: v = (d2 < 100) ? 400 + int'($urandom_range(0, 200)) : int'($urandom_range(0, 3));
        endcase
        if (v > 1023) v = 1023;
        if (v < 0) v = 0;
        f[r][c] = PIX_W'(v);
      end
    return f;
  endfunction

  // Loads a frame; with b2b the load lands on the last column of the frame
  // still being read out.
  task automatic send(input int kind, input pp_cfg_t c, input bit b2b, input bit record);
    frame_exp_t e;
    frame_t f = make_frame(kind);
    if (b2b) begin
      wait (dut.col_eof);
      n_b2b++;
    end else begin
      repeat (4) @(posedge clk);
    end
    #1;
    cfg = c;
    pixel_counts = f;
    frame_load = 1;
    @(posedge clk); #1 frame_load = 0;
    if (record) begin
      preprocess_frame(f, c, e.v);
      sent.push_back(e);
    end
    // 64 columns in 64 clocks
    begin
      int n = 0;
      for (int k = 0; k < NCOLS; k++) begin
        if (dut.col_valid) n++;
        if (k < NCOLS - 1) begin @(posedge clk); #1; end
      end
      checks++;
      if (n != NCOLS) begin failures++; n_cols_clocks_bad++; end
    end
  endtask

  task automatic count_cfg(input pp_cfg_t c);
    if (c.crop_en) n_cfg["crop"]++;
    if (c.bg_en)   n_cfg["background"]++;
    if (c.bin_en)  n_cfg["binning"]++;
    n_cfg[c.quant.name()]++;
  endtask

  initial begin
    pp_cfg_t c;
    int pos;
    pixel_counts = '0;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; link_rst_n = 1;
    repeat (20) @(posedge clk);

    // ---- checked frames ----
    for (int t = 0; t < 14; t++) begin
      c = '0;
      case (t)
        3: c.quant = Q_SQRT_FLOOR;
        4: c.quant = Q_SQRT_ROUND;
        5: c.quant = Q_CUBE_ROOT;
        6: begin c.bg_en = 1; c.bg_level = 10'd2; end
        7: begin c.crop_en = 1; c.crop_col_lo = 6'd8; c.crop_col_hi = 6'd53; c.crop_row_lo = 6'd4; c.crop_row_hi = 6'd59; end
        8: c.bin_en = 1;
        9, 10: begin c.crop_en = 1; c.crop_col_lo = 6'd3; c.crop_col_hi = 6'd60; c.crop_row_lo = 6'd2; c.crop_row_hi = 6'd61;
                 c.bg_en = 1; c.bg_level = 10'd1; c.bin_en = 1; c.quant = (t == 9) ? Q_SQRT_ROUND : Q_SQRT_FLOOR; end
        default: ;
      endcase
      if (t == 11) begin
        #1 cb_req = 1;
        @(posedge link_clk); #1 cb_req = 0;
      end
      count_cfg(c);
      // frames 1, 2 and 13 follow their predecessor back to back (same config)
      send((t == 1 || t == 12 || t == 13) ? 1 : (t == 2 ? 2 : (t % 2 ? 3 : 0)), c, (t == 1 || t == 2 || t == 13), 1);
    end
    // drain
    repeat (3000) @(posedge clk);

    // ---- decode and compare ----
    pos = 0;
    foreach (sent[f]) begin
      foreach (sent[f].v[k]) begin
        vec_t got;
        if (pos >= stream.size()) begin failures++; $display("FAIL stream ends in frame %0d", f); break; end
        got = decode_vec(stream, pos);
        checks++;
        if (got != sent[f].v[k]) begin
          failures++;
          if (failures < 6) $display("FAIL frame %0d vector %0d", f, k);
        end
      end
      pos = ((pos + 63) / 64) * 64;   // next frame starts on a word boundary
    end
    checks++;
    if (pos != stream.size()) begin failures++; $display("FAIL %0d stream words left over", stream.size() - pos); end

    // ---- overflow: hold the link idle and keep frames coming ----
    capture = 0;
    idle_req = 1;
    c = '0;
    for (int t = 0; t < 3; t++) send(1, c, t > 0, 0);
    repeat (200) @(posedge clk);
    idle_req = 0;
    repeat (2000) @(posedge clk);

    // ---- mechanisms ----
    begin
      string names[$] = '{"Q_NONE", "Q_SQRT_FLOOR", "Q_SQRT_ROUND", "Q_CUBE_ROOT", "crop", "background", "binning"};
      foreach (names[i]) begin
        checks++;
        if (!n_cfg.exists(names[i])) begin failures++; $display("FAIL never used %s", names[i]); end
      end
    end
    checks++; if (n_b2b == 0)        begin failures++; $display("FAIL no back-to-back frames"); end
    checks++; if (n_bw0 == 0)        begin failures++; $display("FAIL no zero region"); end
    checks++; if (n_bw10 == 0)       begin failures++; $display("FAIL no full-width region"); end
    checks++; if (n_idle == 0)       begin failures++; $display("FAIL no IDLE"); end
    checks++; if (n_cb != 1)         begin failures++; $display("FAIL channel bonding blocks %0d", n_cb); end
    checks++; if (n_full == 0)       begin failures++; $display("FAIL FIFO never full"); end
    checks++; if (n_ovf == 0)        begin failures++; $display("FAIL no overflow"); end
    checks++; if (n_ovf_msg == 0)    begin failures++; $display("FAIL no overflow message"); end
    $display("frames=%0d words=%0d back-to-back=%0d bw0=%0d bw10=%0d idle=%0d cb=%0d full=%0d overflow=%0d ovf_msg=%0d two-word-flush=%0d",
             sent.size(), n_data_words, n_b2b, n_bw0, n_bw10, n_idle, n_cb, n_full, n_ovf, n_ovf_msg, n_two_word_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
