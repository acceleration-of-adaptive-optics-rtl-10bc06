// tb_ca_pixel_weight: self-checking test of the pixel weighting unit.
// Random and edge-case pixels (0, 1, 65535, perfect squares) in all three
// modes, with random stalls and bubbles. Expected values: p, p^2, and
// floor(p^1.5) found from a floating-point square root corrected by exact
// integer comparison. Also checks the 26-clock latency and that a word is
// accepted every clock.
module tb_ca_pixel_weight;
  import ca_pkg::*;
  logic clk = 0, rst = 1, en = 1, in_valid = 0;
  wgt_mode_e mode;
  logic [LANES-1:0][PIX_W-1:0] in_pix;
  logic out_valid, busy;
  logic [LANES-1:0][WGT_W-1:0] out_w;
  int checks = 0, failures = 0, cycle = 0, first_out = -1, n_out = 0;

  ca_pixel_weight dut (.*);
  always #5 clk = ~clk;

  typedef logic [LANES-1:0][WGT_W-1:0] word_t;
  word_t expq[$];

  function automatic logic [WGT_W-1:0] w_of(logic [PIX_W-1:0] p, wgt_mode_e m);
    longint c, r;
    case (m)
      WGT_P2:   return WGT_W'(longint'(p) * longint'(p));
      WGT_P1_5: begin
        c = longint'(p) * longint'(p) * longint'(p);
        r = longint'($floor($sqrt(real'(c))));
        while (r * r > c) r--;
        while ((r + 1) * (r + 1) <= c) r++;
        return WGT_W'(r);
      end
      default:  return WGT_W'(p);
    endcase
  endfunction

  function automatic logic [PIX_W-1:0] rnd_pix();
    case ($urandom_range(0, 5))
      0: return 16'hFFFF;
      1: return PIX_W'($urandom_range(0, 3));
      2: begin int k = $urandom_range(0, 255); return PIX_W'(k * k); end
      default: return PIX_W'($urandom);
    endcase
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst && en && out_valid) begin
      word_t e;
      if (first_out < 0) first_out = cycle;
      n_out++;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = expq.pop_front();
        if (out_w !== e) begin failures++; $display("MISMATCH %h exp %h", out_w, e); end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tin, tout, n0;
    in_pix = '0; mode = WGT_NONE;
    repeat (3) @(posedge clk);
    rst <= 0;
    // back-to-back, no stalls: latency and rate
    for (int i = 0; i < 100; i++) begin
      word_t e;
      @(negedge clk);
      en = 1; in_valid = 1;
      mode = wgt_mode_e'($urandom_range(0, 2));
      for (int l = 0; l < LANES; l++) begin in_pix[l] = rnd_pix(); e[l] = w_of(in_pix[l], mode); end
      expq.push_back(e);
      if (i == 0) tin = cycle;
    end
    @(negedge clk); in_valid = 0;
    repeat (40) @(negedge clk);
    tout = first_out; n0 = n_out;
    checks++;
    if (tout - tin != 26) begin failures++; $display("latency %0d, expected 26", tout - tin); end
    checks++;
    if (n0 != 100) begin failures++; $display("rate: %0d words", n0); end
    // stalls and bubbles
    for (int i = 0; i < 5000; i++) begin
      word_t e;
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      in_valid = 1'($urandom);
      mode = wgt_mode_e'($urandom_range(0, 2));
      for (int l = 0; l < LANES; l++) begin in_pix[l] = rnd_pix(); e[l] = w_of(in_pix[l], mode); end
      if (en && in_valid) expq.push_back(e);
    end
    @(negedge clk); in_valid = 0; en = 1;
    repeat (40) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
