// tb_ca_fix2float: self-checking test of the fixed-point to single-precision
// conversion. Hand-worked values (integers, halves, the smallest step, NaN
// for an empty sub-aperture, zero) are followed by random quotients of all
// magnitudes with random remainder flags. The reference rounds with integer
// arithmetic: the remainder flag is appended as an extra low bit, which
// lies below the guard bit whenever the value has more than 24 significant
// bits. Checks the 2-clock latency and behaviour under stalls.
module tb_ca_fix2float;
  import ca_pkg::*;
  localparam int INT_W = 5, FRAC_W = 32, QW = INT_W + FRAC_W;
  logic clk = 0, rst = 1, en = 1, in_valid = 0;
  logic [QW-1:0] quo;
  logic sticky, zero_den;
  logic out_valid, busy;
  logic [31:0] fp;
  int checks = 0, failures = 0, cycle = 0;

  ca_fix2float #(.INT_W(INT_W), .FRAC_W(FRAC_W)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] expq[$];

  // positive m * 2^-scale to single, round to nearest even
  function automatic logic [31:0] i2f(longint m, int scale);
    int e;
    longint q, r, half;
    e = 63;
    while (e > 0 && m[e] == 1'b0) e--;
    if (e > 23) begin
      q = m >> (e - 23);
      r = m - (q << (e - 23));
      half = longint'(1) << (e - 24);
      if (r > half || (r == half && q[0])) q++;
      if (q == (longint'(1) << 24)) begin q = q >> 1; e++; end
    end else q = m << (23 - e);
    return {1'b0, 8'(e - scale + 127), q[22:0]};
  endfunction

  function automatic logic [31:0] model(logic [QW-1:0] q, logic s, logic z);
    if (z) return 32'h7FC0_0000;
    if (q == 0) return 32'h0;
    if (q >= (QW'(1) << 24)) return i2f((longint'(q) << 1) | longint'(s), FRAC_W + 1);
    return i2f(longint'(q), FRAC_W);
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst && en && out_valid) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        logic [31:0] e;
        e = expq.pop_front();
        if (fp !== e) begin failures++; $display("MISMATCH fp=%h exp=%h", fp, e); end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(logic [QW-1:0] q, logic s, logic z, logic [31:0] e);
    @(negedge clk);
    quo = q; sticky = s; zero_den = z; in_valid = 1; en = 1;
    expq.push_back(e);
  endtask

  int tin = -1, tout = -1;
  always @(posedge clk) begin
    if (!rst && in_valid && tin < 0) tin = cycle;
    if (!rst && out_valid && tout < 0) tout = cycle;
  end

  initial begin
    quo = 0; sticky = 0; zero_den = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // hand-worked values
    put(QW'(3) << (FRAC_W - 1), 0, 0, 32'h3FC0_0000);         // 1.5
    put(QW'(31) << FRAC_W, 0, 0, 32'h41F8_0000);              // 31.0
    put(QW'(1), 0, 0, 32'h2F80_0000);                         // 2^-32
    put('0, 1, 0, 32'h0000_0000);                             // below one step
    put('0, 0, 1, 32'h7FC0_0000);                             // empty sub-aperture
    // 1 + 2^-24 exactly is a tie: rounds to even (1.0); with a remainder, up
    put((QW'(1) << FRAC_W) | QW'(256), 0, 0, 32'h3F80_0000);
    put((QW'(1) << FRAC_W) | QW'(256), 1, 0, 32'h3F80_0001);
    @(negedge clk); in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (tout - tin != 2) begin failures++; $display("latency %0d, expected 2", tout - tin); end
    // random values of every magnitude, random stalls
    for (int i = 0; i < 20000; i++) begin
      logic [QW-1:0] q;
      q = QW'({$urandom, $urandom}) >> $urandom_range(0, QW - 1);
      if (q >= (QW'(31) << FRAC_W)) q = q >> 1;
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      quo = q; sticky = 1'($urandom); zero_den = ($urandom_range(0, 50) == 0);
      in_valid = 1'($urandom);
      if (en && in_valid) expq.push_back(model(quo, sticky, zero_den));
    end
    @(negedge clk); in_valid = 0; en = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
