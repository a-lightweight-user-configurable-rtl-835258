// tb_coalesce_packing: streams random variable-length word lists (0..41
// words, each word a running sequence number so order errors show) into the
// packing stage, with frame-end flushes at random points, and checks every
// 1024-bit output word against a queue model: outputs are the input words in
// order, 64 per word, and at a flush the stream is padded with zero words up
// to the next word boundary. Also checks that the stage never holds more
// than 63 words and that, after the last flush, every input word came out.
module tb_coalesce_packing;
  localparam int W = 16, OUTW = 64, MAXW = 41;
  logic              clk = 0, rst_n = 0;
  logic [MAXW*W-1:0] in_data;
  logic [5:0]        in_len;
  logic              flush;
  logic              out_valid;
  logic [OUTW*W-1:0] out_data;
  logic [5:0]        level;
  int checks = 0, failures = 0, seq = 1, nout = 0, nflush = 0, ndouble = 0;
  logic [W-1:0] exp_q[$];

  coalesce_packing #(.W(W), .OUTW(OUTW), .MAXW(MAXW)) dut (
    .clk(clk), .rst_n(rst_n), .in_data(in_data), .in_len(in_len), .flush(flush),
    .out_valid(out_valid), .out_data(out_data), .level(level));

  always #5 clk = ~clk;

  // model: words enter exp_q in order; a flush pads to a multiple of OUTW
  task automatic drive(input int len, input bit fl);
    in_data = '1;                     // words above len are garbage on purpose
    for (int i = 0; i < len; i++) begin
      in_data[i*W +: W] = W'(seq);
      exp_q.push_back(W'(seq));
      seq++;
    end
    in_len = 6'(len);
    flush  = fl;
    if (fl) begin
      nflush++;
      while (exp_q.size() % OUTW != 0) exp_q.push_back('0);
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (dut.pend) ndouble++;
    if (out_valid) begin
      nout++;
      for (int i = 0; i < OUTW; i++) begin
        logic [W-1:0] e;
        e = (exp_q.size() > 0) ? exp_q.pop_front() : 16'hDEAD;
        checks++;
        if (out_data[i*W +: W] != e) begin
          failures++;
          if (failures < 10) $display("FAIL word %0d of output %0d: got %h exp %h", i, nout, out_data[i*W +: W], e);
        end
      end
    end
  end

  initial begin
    in_len = 0; flush = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      @(posedge clk); #1;
      if (t % 500 == 499) drive(MAXW, 1);            // flush right after a full word
      else drive(int'($urandom_range(0, MAXW)), ($urandom_range(0, 99) == 0));
      checks++;
      if (level > 63) failures++;
    end
    @(posedge clk); #1; drive(0, 1);
    @(posedge clk); #1; drive(0, 0);
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d words never came out", exp_q.size());
    end
    checks++;
    if (nout * OUTW < seq - 1) failures++;
    checks++;
    if (ndouble == 0) begin failures++; $display("FAIL the two-word flush case never happened"); end
    $display("outputs=%0d flushes=%0d two-word flushes=%0d", nout, nflush, ndouble);
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
