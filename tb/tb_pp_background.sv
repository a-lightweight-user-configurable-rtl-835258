// tb_pp_background: random pixels and background levels; the output must be
// max(pixel - level, 0) when enabled and the pixel itself when disabled.
module tb_pp_background;
  logic en;
  logic [9:0] level;
  logic [63:0][9:0] in_data, out_data;
  int checks = 0, failures = 0;

  pp_background #(.NPIX(64), .PIX_W(10)) dut (.en(en), .level(level), .in_data(in_data), .out_data(out_data));

  initial begin
    for (int t = 0; t < 3000; t++) begin
      en = ($urandom_range(0, 3) != 0);
      level = (t % 2) ? 10'($urandom_range(0, 50)) : 10'($urandom);
      for (int r = 0; r < 64; r++) in_data[r] = (t % 3) ? 10'($urandom_range(0, 100)) : 10'($urandom);
      #1;
      for (int r = 0; r < 64; r++) begin
        int e;
        e = !en ? int'(in_data[r]) : (int'(in_data[r]) > int'(level) ? int'(in_data[r]) - int'(level) : 0);
        checks++;
        if (int'(out_data[r]) != e) failures++;
      end
    end
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
