// tb_scrambler_64b66b: compares the scrambler with a bit-serial model of
// 1 + x^39 + x^58 (state all ones after reset), over random payloads with
// random enable, and descrambles the output with a separate bit-serial
// descrambler started from an arbitrary state: after the first 58 bits it
// must return the original payloads (self-synchronisation).
module tb_scrambler_64b66b;
  logic clk = 0, rst_n = 0, en = 0;
  logic [63:0] din, dout;
  logic [57:0] ref_s = '1, des_s = 58'h123456789ABCDEF;
  int checks = 0, failures = 0, nblk = 0;

  scrambler_64b66b dut (.clk(clk), .rst_n(rst_n), .en(en), .din(din), .dout(dout));
  always #5 clk = ~clk;

  always @(negedge clk) if (rst_n && en) begin
    logic [63:0] r, d;
    for (int i = 0; i < 64; i++) begin
      r[i]  = din[i] ^ ref_s[38] ^ ref_s[57];
      ref_s = {ref_s[56:0], r[i]};
      d[i]  = dout[i] ^ des_s[38] ^ des_s[57];
      des_s = {des_s[56:0], dout[i]};
    end
    checks++;
    if (dout != r) begin failures++; if (failures < 5) $display("FAIL block %0d: %h vs %h", nblk, dout, r); end
    if (nblk > 0) begin
      checks++;
      if (d != din) failures++;
    end
    nblk++;
  end

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(posedge clk); #1;
      en  = ($urandom_range(0, 3) != 0);
      din = (t < 20) ? 64'd0 : {$urandom, $urandom};
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
