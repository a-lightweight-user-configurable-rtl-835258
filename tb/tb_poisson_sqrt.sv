// tb_poisson_sqrt: exhaustive check of the Poisson-encoding square root.
// Every 10-bit input is applied in floor and in rounding mode and compared
// with floor(sqrt(N)) from an integer search and round(sqrt(N)) from real
// arithmetic. Also checks the paper's worked example: 15 -> 3 (decoded 9)
// with floor and 15 -> 4 (decoded 16) with rounding.
module tb_poisson_sqrt;
  logic [9:0] n;
  logic       rnd;
  logic [5:0] s;
  int checks = 0, failures = 0;

  poisson_sqrt #(.B(10)) dut (.n(n), .round_en(rnd), .s(s));

  initial begin
    for (int m = 0; m < 2; m++) begin
      for (int v = 0; v < 1024; v++) begin
        int exp_s, r;
        n = 10'(v); rnd = (m == 1);
        #1;
        r = 0;
        while ((r + 1) * (r + 1) <= v) r++;
        exp_s = rnd ? $rtoi($sqrt(real'(v)) + 0.5) : r;
        checks++;
        if (int'(s) != exp_s) begin
          failures++;
          if (failures < 10) $display("FAIL N=%0d round=%0d got %0d exp %0d", v, rnd, s, exp_s);
        end
      end
    end
    n = 10'd15; rnd = 0; #1; checks++; if (s * s != 9)  failures++;
    rnd = 1; #1;             checks++; if (s * s != 16) failures++;
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
