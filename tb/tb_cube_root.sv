// tb_cube_root: exhaustive check of the cube-root quantiser against an
// integer search for the largest k with k^3 <= N, for all 10-bit N.
module tb_cube_root;
  logic [9:0] n;
  logic [6:0] r;
  int checks = 0, failures = 0;

  cube_root #(.B(10)) dut (.n(n), .r(r));

  initial begin
    for (int v = 0; v < 1024; v++) begin
      int k;
      n = 10'(v);
      #1;
      k = 0;
      while ((k + 1) * (k + 1) * (k + 1) <= v) k++;
      checks++;
      if (int'(r) != k) begin
        failures++;
        if (failures < 10) $display("FAIL N=%0d got %0d exp %0d", v, r, k);
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
