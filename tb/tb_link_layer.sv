// tb_link_layer: 16-lane link layer with a queue model of the FIFO read side.
// A receiver model per lane (tb_lane_rx) rebuilds and descrambles the blocks.
// Checks: every block slot carries the same kind of block on all lanes; data
// blocks, put back together across lanes, return the FIFO words in order; an
// empty FIFO or idle_req gives IDLE blocks; each cb_req pulse gives one
// channel-bonding block and each ovf_toggle edge one overflow message; and
// with data always waiting, 32 of every 66 clocks take a block, all data.
module tb_link_layer;
  import detector_pkg::*;
  localparam int NL = 16;
  logic clk = 0, rst_n = 0;
  logic [NL*64-1:0] fifo_rdata;
  logic fifo_empty, fifo_rd_en, idle_req = 0, cb_req = 0, ovf_toggle = 0;
  logic ser_valid, blk_take;
  logic [NL-1:0][31:0] ser_word;
  blk_kind_e blk_kind;
  logic [NL*64-1:0] txq[$], expq[$];
  logic [NL-1:0] rv;
  logic [NL-1:0][1:0]  rs;
  logic [NL-1:0][63:0] rp;
  int checks = 0, failures = 0, n_idle = 0, n_cb = 0, n_ovf = 0, n_data = 0, n_cbreq = 0, n_ovfreq = 0;
  int n_idle_during_req = 0;

  link_layer #(.NLANES(NL)) dut (
    .clk(clk), .rst_n(rst_n), .fifo_rdata(fifo_rdata), .fifo_empty(fifo_empty), .fifo_rd_en(fifo_rd_en),
    .idle_req(idle_req), .cb_req(cb_req), .ovf_toggle(ovf_toggle),
    .ser_valid(ser_valid), .ser_word(ser_word), .blk_kind(blk_kind), .blk_take(blk_take));

  for (genvar i = 0; i < NL; i++) begin : g_rx
    tb_lane_rx u_rx (.clk(clk), .rst_n(rst_n), .in_valid(ser_valid), .in_word(ser_word[i]),
                     .blk_valid(rv[i]), .blk_sync(rs[i]), .blk_payload(rp[i]));
  end

  always #5 clk = ~clk;

  assign fifo_empty = (txq.size() == 0);
  assign fifo_rdata = fifo_empty ? '0 : txq[0];

  function automatic logic [NL*64-1:0] rnd_word();
    logic [NL*64-1:0] v;
    for (int i = 0; i < NL * 2; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (fifo_rd_en) void'(txq.pop_front());
  end

  // receive side
  always @(negedge clk) if (rst_n && rv[0]) begin
    checks++;
    if (rv != '1) failures++;
    checks++;
    if (rs != {NL{rs[0]}}) failures++;
    if (rs[0] == SYNC_DATA) begin
      logic [NL*64-1:0] w;
      for (int i = 0; i < NL; i++) w[i*64 +: 64] = rp[i];
      n_data++;
      checks++;
      if (expq.size() == 0 || w != expq.pop_front()) begin
        failures++; if (failures < 5) $display("FAIL data word %0d", n_data);
      end
    end else begin
      checks++;
      if (rp != {NL{rp[0]}}) failures++;
      if (rp[0] == 64'(BTF_IDLE))                          n_idle++;
      else if (rp[0] == (64'(BTF_IDLE) | (64'd1 << CB_BIT))) n_cb++;
      else if (rp[0][7:0] == BTF_UK0)                       n_ovf++;
      else begin failures++; $display("FAIL unknown control block %h", rp[0]); end
    end
  end

  task automatic push(input int n);
    for (int i = 0; i < n; i++) begin
      logic [NL*64-1:0] w;
      w = rnd_word();
      txq.push_back(w);
      expq.push_back(w);
    end
  endtask

  initial begin
    int t0, tk;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);                // idle link
    @(posedge clk); #1 push(200);
    // steady-state rate: count takes over 66*4 clocks while data waits
    repeat (10) @(posedge clk);
    tk = 0;
    for (int c = 0; c < 66 * 4; c++) begin
      @(posedge clk);
      if (blk_take) begin
        tk++;
        checks++; if (blk_kind != BLK_DATA) failures++;
      end
    end
    checks++;
    if (tk != 32 * 4) begin failures++; $display("FAIL rate %0d takes", tk); end
    // channel bonding and overflow requests in the middle of data
    #1 cb_req = 1; n_cbreq++; @(posedge clk); #1 cb_req = 0;
    repeat (7) @(posedge clk);
    #1 ovf_toggle = ~ovf_toggle; n_ovfreq++;
    repeat (9) @(posedge clk);
    #1 push(50);
    // idle_req holds data back
    idle_req = 1;
    t0 = n_data;
    repeat (40) @(posedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (n_data > t0 + 3) begin failures++; $display("FAIL data sent during idle_req"); end
    idle_req = 0;
    repeat (1200) @(posedge clk);
    #1 cb_req = 1; n_cbreq++; @(posedge clk); #1 cb_req = 0;
    repeat (30) @(posedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL %0d words not received", expq.size()); end
    checks++; if (n_cb != n_cbreq) begin failures++; $display("FAIL cb %0d/%0d", n_cb, n_cbreq); end
    checks++; if (n_ovf != n_ovfreq) begin failures++; $display("FAIL ovf %0d/%0d", n_ovf, n_ovfreq); end
    checks++; if (n_idle == 0) failures++;
    $display("data=%0d idle=%0d cb=%0d ovf=%0d", n_data, n_idle, n_cb, n_ovf);
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
