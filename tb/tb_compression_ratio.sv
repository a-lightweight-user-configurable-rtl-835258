// tb_compression_ratio: compression-ratio workload on synthetic diffraction
// frames at the default size (64 x 64, 10-bit), driving detector_top with no
// parameter overrides.
//
// What it does: each frame is a Gaussian beam centred on the array, scaled so
// that its peak mean is 0.9 of 15, 63, 255 or 1023 counts, with beam sigma 3
// or 8 pixels, plus a flat 0.05 counts per pixel. The testbench draws photon
// noise for every pixel and clips at the peak value. Every frame is sent three
// times: losslessly (Q_NONE), with Q_SQRT_ROUND and with Q_SQRT_FLOOR.
//
// How it checks: the number of 16-bit stream words that the coalescing stage
// produces for the frame (sum of the reduction length, before frame-end
// padding) must equal the count predicted from the reference preprocessing
// model plus the bit-width rule. The ratio 40960 raw bits / stream bits is
// printed. Square-root encoding must never give a lower ratio than lossless
// compression of the same frame.
//
// Interface and timing: clk has a 10-unit period and link_clk an 8-unit one.
// One frame is loaded and then the testbench waits 68 core clocks, so frames do
// not overlap. The link side is left free-running; only the core side is
// measured.
//
// Paper versus this testbench: the paper reports ratios measured on real
// ptychography data; those data are not available here, so this workload uses
// synthetic frames. The beam shape, count levels and background are this
// testbench's choices.
module tb_compression_ratio;
  import detector_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, link_clk = 0, link_rst_n = 0;
  logic frame_load = 0;
  frame_t pixel_counts;
  pp_cfg_t cfg;
  logic fifo_full, fifo_overflow, ser_valid;
  logic [NLANES-1:0][SER_W-1:0] ser_word;

  detector_top dut (
    .clk(clk), .rst_n(rst_n), .frame_load(frame_load), .pixel_counts(pixel_counts), .cfg(cfg),
    .fifo_full(fifo_full), .fifo_overflow(fifo_overflow),
    .link_clk(link_clk), .link_rst_n(link_rst_n), .idle_req(1'b0), .cb_req(1'b0),
    .ser_valid(ser_valid), .ser_word(ser_word));

  always #5 clk = ~clk;
  always #4 link_clk = ~link_clk;

  int checks = 0, failures = 0;
  longint words_seen = 0;

  always @(posedge clk) if (rst_n) words_seen += longint'(dut.red_len);

  // Poisson sample with mean m (Knuth's method for small m, normal approx. above)
  function automatic int poisson(real m);
    if (m <= 0.0) return 0;
    if (m < 30.0) begin
      real l, p;
      int k;
      l = $exp(-m); p = 1.0; k = 0;
      do begin
        k++;
        p = p * (real'($urandom) / 4294967296.0);
      end while (p > l);
      return k - 1;
    end else begin
      real u1, u2, z;
      int v;
      u1 = (real'($urandom) + 1.0) / 4294967297.0;
      u2 = real'($urandom) / 4294967296.0;
      z  = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
      v  = $rtoi(m + $sqrt(m) * z + 0.5);
      return (v < 0) ? 0 : v;
    end
  endfunction

  function automatic frame_t make_frame(int maxc, real spread);
    frame_t f;
    for (int r = 0; r < NROWS; r++)
      for (int c = 0; c < NCOLS; c++) begin
        real d2, m;
        int v;
        d2 = real'((r - 32) * (r - 32) + (c - 31) * (c - 31));
        m  = real'(maxc) * 0.9 * $exp(-d2 / (2.0 * spread * spread)) + 0.05;
        v  = poisson(m);
        f[r][c] = PIX_W'((v > maxc) ? maxc : v);
      end
    return f;
  endfunction

  task automatic run(input frame_t f, input quant_e q, output real ratio);
    pp_cfg_t c;
    vec_t e[$];
    longint w0, exp_words;
    c = '0;
    exp_words = 0;
    c.quant = q;
    preprocess_frame(f, c, e);
    foreach (e[k]) begin
      exp_words++;
      for (int g = 0; g < NCOMP; g++) begin
        int bw;
        bw = 0;
        for (int i = 0; i < REGION; i++)
          for (int b = 0; b < PIX_W; b++) if (e[k][g*REGION + i][b] && b + 1 > bw) bw = b + 1;
        exp_words += bw;
      end
    end
    repeat (2) @(posedge clk);
    #1 cfg = c; pixel_counts = f; frame_load = 1;
    w0 = words_seen;
    @(posedge clk); #1 frame_load = 0;
    repeat (NCOLS + 4) @(posedge clk);
    checks++;
    if (words_seen - w0 != exp_words) begin
      failures++;
      $display("FAIL %s: %0d words, expected %0d", q.name(), words_seen - w0, exp_words);
    end
    ratio = real'(NROWS * NCOLS * PIX_W) / real'((words_seen - w0) * WORD_W);
  endtask

  initial begin
    int maxcs[4] = '{15, 63, 255, 1023};
    real spreads[2] = '{3.0, 8.0};
    pixel_counts = '0;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; link_rst_n = 1;
    foreach (maxcs[i])
      foreach (spreads[s]) begin
        frame_t f;
        real r_none, r_round, r_floor;
        f = make_frame(maxcs[i], spreads[s]);
        run(f, Q_NONE, r_none);
        run(f, Q_SQRT_ROUND, r_round);
        run(f, Q_SQRT_FLOOR, r_floor);
        $display("max count %4d, beam sigma %4.1f px: lossless %6.2fx  +Poisson(round) %6.2fx  +Poisson(floor) %6.2fx",
                 maxcs[i], spreads[s], r_none, r_round, r_floor);
        checks++;
        if (r_round < r_none || r_floor < r_none) begin
          failures++; $display("FAIL Poisson encoding lowered the ratio");
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
