// tb_pp_crop: random columns and crop windows; a column is kept only inside
// [col_lo, col_hi] and, in a kept column, pixels outside [row_lo, row_hi]
// read zero. With cropping disabled everything passes unchanged.
module tb_pp_crop;
  logic en, in_valid, out_valid;
  logic [5:0] col_lo, col_hi, row_lo, row_hi, in_col;
  logic [63:0][9:0] in_data, out_data;
  int checks = 0, failures = 0, ndrop = 0;

  pp_crop #(.NROWS(64), .NCOLS(64), .PIX_W(10)) dut (
    .en(en), .col_lo(col_lo), .col_hi(col_hi), .row_lo(row_lo), .row_hi(row_hi),
    .in_valid(in_valid), .in_col(in_col), .in_data(in_data), .out_valid(out_valid), .out_data(out_data));

  initial begin
    for (int t = 0; t < 3000; t++) begin
      bit keep;
      en = ($urandom_range(0, 3) != 0);
      col_lo = 6'($urandom); col_hi = 6'($urandom); row_lo = 6'($urandom); row_hi = 6'($urandom);
      in_col = 6'($urandom); in_valid = ($urandom_range(0, 7) != 0);
      for (int r = 0; r < 64; r++) in_data[r] = 10'($urandom);
      #1;
      keep = !en || (in_col >= col_lo && in_col <= col_hi);
      if (!keep && in_valid) ndrop++;
      checks++;
      if (out_valid != (in_valid && keep)) failures++;
      for (int r = 0; r < 64; r++) begin
        logic [9:0] e;
        e = (en && (r < row_lo || r > row_hi)) ? 10'd0 : in_data[r];
        checks++;
        if (out_data[r] != e) failures++;
      end
    end
    checks++; if (ndrop == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
