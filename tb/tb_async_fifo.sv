// tb_async_fifo: dual-clock test of the wide FIFO at its default size
// (16 x 1024 bits). The write clock (10 ns) and read clock (13 ns) are
// unrelated; writes and reads are random. A scoreboard checks every word read
// against the words accepted, in order; a burst of writes with reads stopped
// fills the FIFO and must raise full, drop the extra writes, pulse
// wr_overflow and toggle ovf_toggle once per dropped write. At the end the
// FIFO must drain to empty.
module tb_async_fifo;
  localparam int W = 1024, D = 16;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en = 0, rd_en = 0, full, empty, wr_overflow, ovf_toggle;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] sb[$];
  int checks = 0, failures = 0, nread = 0, novf = 0, ntog = 0, ndropped = 0;
  logic tog_q = 0;
  bit   rd_allow = 1, wr_burst = 0;

  async_fifo #(.W(W), .DEPTH(D)) dut (
    .wclk(wclk), .wrst_n(wrst_n), .wr_en(wr_en), .wdata(wdata), .full(full),
    .wr_overflow(wr_overflow), .ovf_toggle(ovf_toggle),
    .rclk(rclk), .rrst_n(rrst_n), .rd_en(rd_en), .rdata(rdata), .empty(empty));

  always #5  wclk = ~wclk;
  always #6.5 rclk = ~rclk;

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // write side
  always @(posedge wclk) if (wrst_n) begin
    if (wr_en && !full) sb.push_back(wdata);
    if (wr_en && full) ndropped++;
    if (wr_overflow) novf++;
    if (ovf_toggle != tog_q) ntog++;
    tog_q <= ovf_toggle;
    #1;
    wr_en <= wr_burst || ($urandom_range(0, 2) != 0);
    wdata <= rnd_word();
  end

  // read side (FWFT: data valid whenever empty is low)
  always @(posedge rclk) if (rrst_n) begin
    if (rd_en && !empty) begin
      logic [W-1:0] e;
      nread++;
      e = sb.pop_front();
      checks++;
      if (rdata != e) begin
        failures++;
        if (failures < 5) $display("FAIL read %0d mismatch", nread);
      end
    end
    #1;
    rd_en <= rd_allow && !empty && ($urandom_range(0, 3) != 0);
  end

  initial begin
    wdata = '0;
    #20 wrst_n = 1; rrst_n = 1;
    #20000;
    // fill: stop reading, keep writing
    rd_allow = 0; wr_burst = 1;
    #1000;
    checks++; if (!full) begin failures++; $display("FAIL not full"); end
    wr_burst = 0; rd_allow = 1;
    #20000;
    wr_burst = 0;
    force wr_en = 0;
    #2000;
    checks++; if (!empty || sb.size() != 0) begin failures++; $display("FAIL not drained: %0d left", sb.size()); end
    checks++; if (ndropped == 0 || novf != ndropped) begin failures++; $display("FAIL overflow pulses %0d dropped %0d", novf, ndropped); end
    checks++; if (ntog != ndropped) begin failures++; $display("FAIL toggles %0d dropped %0d", ntog, ndropped); end
    checks++; if (nread < 1000) failures++;
    $display("reads=%0d dropped=%0d", nread, ndropped);
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
