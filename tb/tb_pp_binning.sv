// tb_pp_binning: streams frames of 64-row columns, with random gaps (invalid
// columns) and random frame lengths, through the binning stage. Enabled, every
// output must be two binned columns of 2 x 2 sums saturated at 1023, one per
// four valid columns, with a zero-padded flush at eof when the group is
// incomplete; disabled, a one-clock delayed copy. Counts full groups and each
// kind of partial flush (1, 2 and 3 columns left) and fails if one never
// occurred, and checks that some sums saturated.
module tb_pp_binning;
  localparam int R = 64, NB = 32;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, in_eof = 0, out_valid, out_eof;
  logic [R-1:0][9:0] in_data, out_data;
  logic [R-1:0][9:0] expq[$];
  logic              exp_eofq[$];
  int checks = 0, failures = 0, nflush[4] = '{0, 0, 0, 0}, nsat = 0;

  pp_binning #(.NROWS(R), .PIX_W(10)) dut (.clk(clk), .rst_n(rst_n), .en(en), .in_valid(in_valid),
    .in_eof(in_eof), .in_data(in_data), .out_valid(out_valid), .out_eof(out_eof), .out_data(out_data));
  always #5 clk = ~clk;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (expq.size() == 0) failures++;
    else if (out_data != expq.pop_front()) begin failures++; if (failures < 5) $display("FAIL output"); end
  end

  task automatic frame(input bit b, input int ncol, input int maxv);
    logic [R-1:0][9:0] cols[$];
    en = b;
    for (int k = 0; k < ncol; k++) begin
      logic [R-1:0][9:0] v;
      for (int r = 0; r < R; r++) v[r] = 10'($urandom_range(0, maxv));
      cols.push_back(v);
    end
    // expected outputs
    if (!b) foreach (cols[k]) expq.push_back(cols[k]);
    else begin
      for (int g = 0; g < (ncol + 3) / 4; g++) begin
        logic [R-1:0][9:0] o;
        for (int h = 0; h < 2; h++)
          for (int j = 0; j < NB; j++) begin
            int s = 0;
            for (int d = 0; d < 2; d++)
              if (4*g + 2*h + d < ncol) s += cols[4*g+2*h+d][2*j] + cols[4*g+2*h+d][2*j+1];
            if (s > 1023) begin s = 1023; nsat++; end
            o[h*NB + j] = 10'(s);
          end
        expq.push_back(o);
      end
      nflush[ncol % 4]++;
    end
    for (int k = 0; k < ncol; k++) begin
      while ($urandom_range(0, 3) == 0) begin
        @(posedge clk); #1 in_valid = 0; in_eof = 0;
      end
      @(posedge clk); #1;
      in_valid = 1; in_data = cols[k]; in_eof = (k == ncol - 1);
    end
    @(posedge clk); #1 in_valid = 0; in_eof = 0;
    @(posedge clk); @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); expq = {}; end
  endtask

  initial begin
    in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 80; t++) frame(t % 5 != 0, (t < 8) ? 60 + t : int'($urandom_range(1, 64)), (t % 2) ? 1023 : 200);
    for (int k = 1; k < 4; k++) begin
      checks++; if (nflush[k] == 0) begin failures++; $display("FAIL no flush with %0d columns left", k); end
    end
    checks++; if (nsat == 0) failures++;
    $display("groups/flushes=%p saturated=%0d", nflush, nsat);
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
