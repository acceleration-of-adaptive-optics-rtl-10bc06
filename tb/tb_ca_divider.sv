// tb_ca_divider: self-checking test of the pipelined fixed-point divider.
// Random numerator/denominator pairs within the centroid range are fed,
// with random stalls, and each result is compared in order with
// floor(num * 2^32 / den) and the remainder flag, computed here with wide
// integer arithmetic. A stall-free run checks the 38-clock latency and the
// one-result-per-clock rate.
module tb_ca_divider;
  localparam int NUM_W = 47, DEN_W = 42, INT_W = 5, FRAC_W = 32, QW = INT_W + FRAC_W;
  logic clk = 0, rst = 1, en = 1, in_valid = 0;
  logic [NUM_W-1:0] num;
  logic [DEN_W-1:0] den;
  logic [0:0] in_tag, out_tag;
  logic out_valid, sticky, busy;
  logic [QW-1:0] quo;
  int checks = 0, failures = 0;

  ca_divider #(.NUM_W(NUM_W), .DEN_W(DEN_W), .INT_W(INT_W), .FRAC_W(FRAC_W), .TAG_W(1)) dut (.*);

  always #5 clk = ~clk;

  typedef struct { logic [QW-1:0] q; logic s; logic t; } exp_t;
  exp_t expq[$];
  int   cycle = 0, first_in = -1, first_out = -1, n_out = 0;

  function automatic exp_t model(logic [NUM_W-1:0] n, logic [DEN_W-1:0] d, logic t);
    logic [127:0] big, qq, rr;
    exp_t e;
    big = 128'(n) << FRAC_W;
    qq  = big / 128'(d);
    rr  = big % 128'(d);
    e.q = QW'(qq); e.s = (rr != 0); e.t = t;
    return e;
  endfunction

  task automatic pick();
    logic [DEN_W-1:0] d;
    logic [63:0] r;
    int kind = $urandom_range(0, 3);
    case (kind)
      0: d = DEN_W'($urandom_range(1, 20));
      1: d = DEN_W'({$urandom, $urandom}) | 1;
      default: d = DEN_W'($urandom) + 1;
    endcase
    r = {$urandom, $urandom};
    // num uniformly below d * 2^INT_W (the centroid range)
    num = NUM_W'((128'(r) * (128'(d) << INT_W)) >> 64);
    if (kind == 3) num = NUM_W'((128'(d) << INT_W) - 1);   // largest legal
    den = d;
    in_tag = 1'($urandom);
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst && en && out_valid) begin
      exp_t e;
      if (first_out < 0) first_out = cycle;
      n_out++;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = expq.pop_front();
        if (quo !== e.q || sticky !== e.s || out_tag !== e.t) begin
          failures++;
          $display("MISMATCH quo=%h exp=%h sticky=%b exp=%b", quo, e.q, sticky, e.s);
        end
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
    num = 0; den = 1; in_tag = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // phase 1: no stalls, 200 back-to-back operands
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      pick(); in_valid = 1; en = 1;
      if (first_in < 0) first_in = cycle;
      expq.push_back(model(num, den, in_tag[0]));
    end
    @(negedge clk); in_valid = 0;
    repeat (QW + 5) @(negedge clk);
    checks++;
    if (first_out - first_in != QW + 1) begin
      failures++; $display("latency %0d, expected %0d", first_out - first_in, QW + 1);
    end
    checks++;
    if (n_out != 200) begin failures++; $display("rate: %0d outputs", n_out); end
    // phase 2: random stalls and bubbles
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      in_valid = $urandom_range(0, 2) != 0;
      pick();
      if (en && in_valid) expq.push_back(model(num, den, in_tag[0]));
    end
    @(negedge clk); in_valid = 0; en = 1;
    repeat (QW + 5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
