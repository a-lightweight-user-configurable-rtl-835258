// tb_dbw_compressor: checks bit shuffling and the bit-width of the dynamic
// bit-width compressor on random 16-pixel regions whose largest value has a
// chosen width (0..10 bits), including the paper's example of a region that
// fits in 5 bits. Plane k, bit i must equal bit k of pixel i; bw must be the
// width of the largest pixel value.
module tb_dbw_compressor;
  logic [15:0][9:0] pix;
  logic [9:0][15:0] plane;
  logic [3:0]       bw;
  int checks = 0, failures = 0;

  dbw_compressor #(.NPIX(16), .PIX_W(10)) dut (.pix(pix), .plane(plane), .bw(bw));

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int width, mx, expw;
      width = (t < 11) ? t : (t == 11 ? 5 : int'($urandom_range(0, 10)));
      mx = 0;
      for (int i = 0; i < 16; i++) begin
        pix[i] = (width == 0) ? 10'd0 : 10'($urandom_range(0, (1 << width) - 1));
        if (int'(pix[i]) > mx) mx = int'(pix[i]);
      end
      #1;
      expw = 0;
      while ((1 << expw) <= mx) expw++;
      checks++;
      if (int'(bw) != expw) begin
        failures++;
        if (failures < 10) $display("FAIL bw got %0d exp %0d (max %0d)", bw, expw, mx);
      end
      for (int k = 0; k < 10; k++)
        for (int i = 0; i < 16; i++) begin
          checks++;
          if (plane[k][i] != pix[i][k]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
