// tb_gearbox_66_32: feeds numbered 66-bit blocks whenever the gearbox asks
// (take) and rebuilds the bit stream from its 32-bit words: the stream must be
// exactly the blocks in order, bit 0 first. Also checks the rate the paper's
// 66-to-32 conversion implies: over 66 x 40 clocks in steady state, 40 x 32
// blocks are taken and every clock after the first carries a word.
module tb_gearbox_66_32;
  logic clk = 0, rst_n = 0;
  logic [65:0] blk;
  logic take, out_valid;
  logic [31:0] out_word;
  int checks = 0, failures = 0, nblk = 0, nchk = 0, nword = 0, nvalid_gap = 0;
  bit  stream[$];
  int  cyc = 0, blk_at_start = 0, blk_at_end = 0;

  gearbox_66_32 dut (.clk(clk), .rst_n(rst_n), .blk(blk), .take(take), .out_valid(out_valid), .out_word(out_word));
  always #5 clk = ~clk;

  function automatic logic [65:0] mk(input int k);
    return {k[15:0], ~k[15:0], 16'hA5C3 ^ k[15:0], k[15:0], 2'(k)};
  endfunction

  assign blk = mk(nblk);

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (cyc > 1 && !out_valid) nvalid_gap++;
    if (out_valid) begin
      for (int i = 0; i < 32; i++) stream.push_back(out_word[i]);
      nword++;
    end
    // compare completed blocks
    while (stream.size() >= 66) begin
      logic [65:0] got, e;
      for (int i = 0; i < 66; i++) got[i] = stream.pop_front();
      e = mk(nchk);
      nchk++;
      checks++;
      if (got != e) begin failures++; if (failures < 5) $display("FAIL block %0d got %h exp %h", nchk - 1, got, e); end
    end
    if (take) nblk <= nblk + 1;
    if (cyc == 100)           blk_at_start = nblk;
    if (cyc == 100 + 66 * 40) blk_at_end   = nblk;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (100 + 66 * 40 + 10) @(posedge clk);
    checks++;
    if (blk_at_end - blk_at_start != 32 * 40) begin
      failures++; $display("FAIL rate: %0d blocks in %0d clocks", blk_at_end - blk_at_start, 66 * 40);
    end
    checks++;
    if (nvalid_gap != 0) begin failures++; $display("FAIL %0d clocks without output word", nvalid_gap); end
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
