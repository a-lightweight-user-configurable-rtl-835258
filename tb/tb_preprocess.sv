// tb_preprocess: runs whole 64 x 64 frames through the preprocessing stage
// under many configurations (each option alone, all together, crop windows of
// odd sizes, every quantiser) and compares the delivered column vectors with
// the frame-level reference model of tb_ref_pkg. The number of vectors per
// frame (one per kept column, or one per four kept columns with binning) and
// the eof marker on the last one are checked too.
module tb_preprocess;
  import detector_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  pp_cfg_t cfg;
  logic in_valid = 0, in_eof = 0, out_valid, out_eof;
  logic [5:0] in_col = 0;
  vec_t in_data, out_data;
  frame_t fr;
  vec_t expq[$];
  int checks = 0, failures = 0, got = 0, neof = 0;

  preprocess dut (.clk(clk), .rst_n(rst_n), .cfg(cfg), .in_valid(in_valid), .in_col(in_col),
                  .in_eof(in_eof), .in_data(in_data), .out_valid(out_valid), .out_eof(out_eof),
                  .out_data(out_data));
  always #5 clk = ~clk;

  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      vec_t e;
      got++;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL extra vector"); end
      else begin
        e = expq.pop_front();
        if (out_data != e) begin
          failures++;
          if (failures < 5) $display("FAIL vector %0d cfg=%p", got, cfg);
        end
      end
    end
    if (out_eof) begin
      neof++;
      checks++;
      if (expq.size() != 0) begin failures++; $display("FAIL eof with %0d vectors missing", expq.size()); end
    end
  end

  task automatic run_frame(input pp_cfg_t c, input int maxv);
    cfg = c;
    for (int r = 0; r < NROWS; r++)
      for (int k = 0; k < NCOLS; k++) fr[r][k] = PIX_W'($urandom_range(0, maxv));
    preprocess_frame(fr, c, expq);
    for (int k = 0; k < NCOLS; k++) begin
      @(posedge clk); #1;
      in_valid = 1; in_col = 6'(k); in_eof = (k == NCOLS - 1);
      for (int r = 0; r < NROWS; r++) in_data[r] = fr[r][k];
    end
    @(posedge clk); #1 in_valid = 0; in_eof = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d vectors missing", expq.size()); expq = {}; end
  endtask

  initial begin
    pp_cfg_t c;
    in_data = '0;
    c = '0;
    cfg = c;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      c = '0;
      case (t % 6)
        0: ;
        1: c.quant = quant_e'(t % 4);
        2: begin c.bg_en = 1; c.bg_level = 10'($urandom_range(0, 40)); end
        3: begin c.crop_en = 1; c.crop_col_lo = 6'($urandom_range(0, 20)); c.crop_col_hi = 6'($urandom_range(30, 63));
                 c.crop_row_lo = 6'($urandom_range(0, 20)); c.crop_row_hi = 6'($urandom_range(30, 63)); end
        4: c.bin_en = 1;
        default: begin
          c.crop_en = 1; c.crop_col_lo = 6'($urandom_range(0, 10)); c.crop_col_hi = 6'($urandom_range(40, 63));
          c.crop_row_lo = 6'($urandom_range(0, 10)); c.crop_row_hi = 6'($urandom_range(40, 63));
          c.bg_en = 1; c.bg_level = 10'($urandom_range(0, 20)); c.bin_en = 1; c.quant = quant_e'(t % 4);
        end
      endcase
      run_frame(c, (t % 3 == 0) ? 1023 : (t % 3 == 1 ? 300 : 15));
    end
    checks++; if (neof != 60) begin failures++; $display("FAIL eof count %0d", neof); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
