// tb_coalesce_reduction: drives four compressors' worth of random bit-widths
// and planes (zero above each bit-width, as a compressor delivers) and checks
// the merged list: word 0 the packed bit-widths, then each compressor's
// planes in order, length 1 + sum(bw); an invalid input gives length 0.
module tb_coalesce_reduction;
  localparam int NC = 4, PW = 10, W = 16, MAXW = 1 + NC * PW;
  logic                          in_valid;
  logic [NC-1:0][3:0]            bw;
  logic [NC-1:0][PW-1:0][W-1:0]  plane;
  logic [MAXW*W-1:0]             out_data;
  logic [5:0]                    out_len;
  int checks = 0, failures = 0;

  coalesce_reduction #(.NCOMP(NC), .PIX_W(PW), .W(W)) dut (
    .in_valid(in_valid), .bw(bw), .plane(plane), .out_data(out_data), .out_len(out_len));

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [W-1:0] exp_q[$];
      logic [W-1:0] meta;
      exp_q = {};
      in_valid = (t % 17) != 5;
      meta = '0;
      for (int c = 0; c < NC; c++) begin
        bw[c] = 4'($urandom_range(0, PW));
        if (t < 11) bw[c] = 4'(t);
        meta[c*4 +: 4] = bw[c];
        for (int k = 0; k < PW; k++) plane[c][k] = (k < int'(bw[c])) ? W'($urandom) : '0;
      end
      exp_q.push_back(meta);
      for (int c = 0; c < NC; c++)
        for (int k = 0; k < int'(bw[c]); k++) exp_q.push_back(plane[c][k]);
      #1;
      checks++;
      if (int'(out_len) != (in_valid ? exp_q.size() : 0)) begin
        failures++;
        if (failures < 10) $display("FAIL len got %0d exp %0d", out_len, exp_q.size());
      end
      if (in_valid)
        foreach (exp_q[i]) begin
          checks++;
          if (out_data[i*W +: W] != exp_q[i]) failures++;
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
