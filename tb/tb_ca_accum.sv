// tb_ca_accum: self-checking test of the centroid accumulator.
// For a series of sub-aperture sizes (including 2x2, 3x5 and 32x32, so
// that sub-apertures end at every lane position of a word and some words
// hold the end of one sub-aperture and the start of the next) a random
// weighted-pixel stream is fed with random stalls and bubbles. The
// reference walks the stream one pixel at a time, keeping its own x, y
// counters and sums. Also checks the 1-clock latency and that a 2x2 run
// gives one result per clock.
module tb_ca_accum;
  import ca_pkg::*;
  localparam int MAX_N = 32;
  localparam int PW = $clog2(MAX_N), SW = WGT_W + 2 * PW, SXW = SW + PW;
  logic clk = 0, rst = 1, en = 1, clear = 0, in_valid = 0;
  logic [NSZ_W-1:0] nx, ny;
  logic [LANES-1:0][WGT_W-1:0] in_w;
  logic out_valid;
  logic [SW-1:0] sum_w;
  logic [SXW-1:0] sum_xw, sum_yw;
  int checks = 0, failures = 0, cycle = 0, n_out = 0;

  ca_accum #(.MAX_N(MAX_N)) dut (.*);
  always #5 clk = ~clk;

  typedef struct { logic [SW-1:0] w; logic [SXW-1:0] x, y; } sums_t;
  sums_t expq[$];
  // reference state
  int rx, ry;
  sums_t racc;

  task automatic ref_pixel(logic [WGT_W-1:0] w);
    racc.w += SW'(w);
    racc.x += SXW'(w) * SXW'(rx);
    racc.y += SXW'(w) * SXW'(ry);
    if (rx == int'(nx) - 1 && ry == int'(ny) - 1) begin
      expq.push_back(racc);
      racc = '{default: 0};
    end
    rx++;
    if (rx == int'(nx)) begin rx = 0; ry++; if (ry == int'(ny)) ry = 0; end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst && en && out_valid) begin
      sums_t e;
      n_out++;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = expq.pop_front();
        if (sum_w !== e.w || sum_xw !== e.x || sum_yw !== e.y) begin
          failures++;
          $display("MISMATCH n=%0dx%0d w=%h/%h x=%h/%h y=%h/%h", nx, ny, sum_w, e.w, sum_xw, e.x, sum_yw, e.y);
        end
      end
    end
  end

  initial begin
    repeat (500000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int snx, int sny, int words, bit stalls, int maxw);
    @(negedge clk);
    in_valid = 0; en = 1;
    nx = NSZ_W'(snx); ny = NSZ_W'(sny);
    clear = 1;
    @(negedge clk);
    clear = 0;
    rx = 0; ry = 0; racc = '{default: 0};
    for (int i = 0; i < words; i++) begin
      en = stalls ? ($urandom_range(0, 3) != 0) : 1'b1;
      in_valid = stalls ? 1'($urandom) : 1'b1;
      for (int l = 0; l < LANES; l++)
        in_w[l] = ($urandom_range(0, 7) == 0) ? 32'hFFFF_FFFF : WGT_W'($urandom_range(0, maxw));
      if (en && in_valid) for (int l = 0; l < LANES; l++) ref_pixel(in_w[l]);
      @(negedge clk);
    end
    in_valid = 0; en = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++; $display("%0dx%0d: %0d results missing", snx, sny, expq.size());
      expq.delete();
    end
  endtask

  initial begin
    int n0, t;
    in_w = '0; nx = 4; ny = 4;
    repeat (3) @(posedge clk);
    rst <= 0;
    // rate: 2x2 sub-apertures, one per word, one result per clock
    n0 = n_out;
    run(2, 2, 50, 0, 65535);
    checks++;
    if (n_out - n0 != 50) begin failures++; $display("2x2 rate: %0d results for 50 words", n_out - n0); end
    // latency: 4x4 needs 4 words; result one clock after the 4th
    @(negedge clk);
    nx = 4; ny = 4; clear = 1; @(negedge clk); clear = 0;
    rx = 0; ry = 0; racc = '{default: 0};
    for (int i = 0; i < 4; i++) begin
      in_valid = 1;
      for (int l = 0; l < LANES; l++) begin in_w[l] = WGT_W'(i * 4 + l); ref_pixel(in_w[l]); end
      @(negedge clk);
    end
    in_valid = 0;
    t = 0;
    while (!out_valid && t < 5) begin @(negedge clk); t++; end
    checks++;
    if (t != 0) begin failures++; $display("latency %0d extra clocks", t); end
    @(negedge clk);
    // many sizes, with stalls
    run(2, 2, 300, 1, 65535);
    run(3, 5, 500, 1, 65535);
    run(5, 3, 500, 1, 1000);
    run(7, 9, 800, 1, 65535);
    run(4, 4, 800, 1, 65535);
    run(32, 32, 1500, 1, 65535);
    run(31, 17, 1500, 1, 65535);
    run(2, 31, 500, 1, 65535);
    for (int k = 0; k < 10; k++) run($urandom_range(2, 32), $urandom_range(2, 32), 1200, 1, 65535);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
