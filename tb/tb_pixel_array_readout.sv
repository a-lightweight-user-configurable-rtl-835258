// tb_pixel_array_readout: loads random frames into the 64 x 64 shift-register
// array and checks that column c of every row appears c+1 clocks after the
// load, with col_idx, sof and eof, that a frame takes exactly 64 clocks, and
// that a load on the last column of a frame gives gap-free back-to-back
// frames.
module tb_pixel_array_readout;
  localparam int R = 64, C = 64, P = 10;
  logic clk = 0, rst_n = 0, load = 0;
  logic [R-1:0][C-1:0][P-1:0] counts, cur;
  logic col_valid, sof, eof;
  logic [5:0] col_idx;
  logic [R-1:0][P-1:0] col_data;
  int checks = 0, failures = 0, nvalid = 0;

  pixel_array_readout #(.NROWS(R), .NCOLS(C), .PIX_W(P)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .counts(counts),
    .col_valid(col_valid), .col_idx(col_idx), .sof(sof), .eof(eof), .col_data(col_data));
  always #5 clk = ~clk;

  task automatic rnd_frame();
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) counts[r][c] = P'($urandom);
  endtask

  initial begin
    counts = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++; if (col_valid) failures++;
    for (int f = 0; f < 4; f++) begin
      #1 rnd_frame(); load = 1; cur = counts;
      @(posedge clk); #1 load = 0;
      for (int c = 0; c < C; c++) begin
        checks++;
        if (!col_valid || int'(col_idx) != c || sof != (c == 0) || eof != (c == C - 1)) failures++;
        for (int r = 0; r < R; r++) begin
          checks++;
          if (col_data[r] != cur[r][c]) failures++;
        end
        if (c == C - 1 && f < 2) begin
          // back-to-back: next load on the last column
          rnd_frame(); load = 1;
          @(posedge clk); #1 load = 0; cur = counts;
          for (int c2 = 0; c2 < C; c2++) begin
            checks++;
            if (!col_valid || int'(col_idx) != c2) failures++;
            for (int r = 0; r < R; r++) begin
              checks++;
              if (col_data[r] != cur[r][c2]) failures++;
            end
            @(posedge clk); #1;
          end
        end else begin
          @(posedge clk); #1;
        end
      end
      checks++; if (col_valid) failures++;
      repeat (3) @(posedge clk);
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
