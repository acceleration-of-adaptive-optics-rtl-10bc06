// tb_ca_fp_offset: self-checking test of the floating-point centre offset.
// Hand-worked cases (exact centre, both edges, a tiny value next to a large
// offset, NaN, zero) are followed by random single-precision inputs over the
// whole range the converter can produce, for every N from 2 to 32. The
// reference scales the input to an exact 64-bit integer, subtracts the
// offset there and rounds to nearest even with integer arithmetic. Checks
// the 2-clock latency and behaviour under stalls.
module tb_ca_fp_offset;
  import ca_pkg::*;
  localparam int INT_W = 5, FRAC_W = 32, L = FRAC_W + 23;
  logic clk = 0, rst = 1, en = 1, in_valid = 0;
  logic [31:0] a;
  logic [NSZ_W-1:0] nm1;
  logic out_valid, busy;
  logic [31:0] fp;
  int checks = 0, failures = 0, cycle = 0;

  ca_fp_offset #(.INT_W(INT_W), .FRAC_W(FRAC_W)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] expq[$];

  function automatic logic [31:0] i2f(logic neg, longint m, int scale);
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
    return {neg, 8'(e - scale + 127), q[22:0]};
  endfunction

  function automatic logic [31:0] model(logic [31:0] x, logic [NSZ_W-1:0] n);
    longint ax, d;
    if (x[30:23] == 8'hFF) return 32'h7FC0_0000;
    // exact: x * 2^L is an integer below 2^60
    ax = (x[30:23] == 0) ? 0 : longint'({1'b1, x[22:0]}) << (int'(x[30:23]) - 127 - 23 + L);
    d  = ax - (longint'(n) << (L - 1));
    if (d == 0) return 32'h0;
    return (d < 0) ? i2f(1'b1, -d, L) : i2f(1'b0, d, L);
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

  task automatic put(logic [31:0] x, logic [NSZ_W-1:0] n, logic [31:0] e);
    @(negedge clk);
    a = x; nm1 = n; in_valid = 1; en = 1;
    expq.push_back(e);
  endtask

  int tin = -1, tout = -1;
  always @(posedge clk) begin
    if (!rst && in_valid && tin < 0) tin = cycle;
    if (!rst && out_valid && tout < 0) tout = cycle;
  end

  initial begin
    a = 0; nm1 = 3;
    repeat (3) @(posedge clk);
    rst <= 0;
    put(32'h3FC0_0000, 3, 32'h0000_0000);    // 1.5 - 1.5 = 0
    put(32'h0000_0000, 31, 32'hC178_0000);   // 0 - 15.5 = -15.5
    put(32'h41F8_0000, 31, 32'h4178_0000);   // 31 - 15.5 = 15.5
    put(32'h3F80_0000, 3, 32'hBF00_0000);    // 1 - 1.5 = -0.5
    put(32'h2F80_0000, 1, 32'hBF00_0000);    // 2^-32 - 0.5 rounds to -0.5
    put(32'h2F80_0000, 0, 32'h2F80_0000);    // 2^-32 - 0 = 2^-32
    put(32'h7FC0_0000, 7, 32'h7FC0_0000);    // NaN stays NaN
    put(32'h4040_0001, 3, 32'h3FC0_0002);    // (3 + 2^-22) - 1.5 = 1.5 + 2^-22
    @(negedge clk); in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (tout - tin != 2) begin failures++; $display("latency %0d, expected 2", tout - tin); end
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] x;
      logic [NSZ_W-1:0] n;
      n = NSZ_W'($urandom_range(1, 31));
      // positive value with exponent in [-32, 4], at most n + 1
      x = {1'b0, 8'($urandom_range(127 - 32, 127 + 4)), 23'($urandom)};
      if ($urandom_range(0, 9) == 0) x = {1'b0, 8'(127 + $urandom_range(0, 3)), 23'($urandom) & 23'h7F_0000};
      if ($urandom_range(0, 49) == 0) x = 0;
      if ($urandom_range(0, 49) == 0) x = 32'h7FC0_0000;
      if (x[30:23] != 8'hFF && x[30:23] > 8'd131) x[30:23] = 8'd131;
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      a = x; nm1 = n; in_valid = 1'($urandom);
      if (en && in_valid) expq.push_back(model(a, nm1));
    end
    @(negedge clk); in_valid = 0; en = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
