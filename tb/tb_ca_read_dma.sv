// tb_ca_read_dma: self-checking test of the host read engine.
// A behavioural host memory answers requests in order after a random
// latency and sometimes refuses requests; the consumer side pops with
// random back-pressure. Checks that every word of the requested range
// arrives once, in order, with the right data, that no response ever
// finds the FIFO full, that a 0-latency, always-ready host gets one word
// per clock (8 bytes per cycle), and that stop ends a run early.
module tb_ca_read_dma;
  import ca_pkg::*;
  logic clk = 0, rst = 1;
  logic start = 0, stop = 0;
  logic [ADDR_W-1:0] rd_addr, rd_bytes;
  logic busy;
  logic rd_req_valid, rd_req_ready;
  logic [ADDR_W-1:0] rd_req_addr;
  logic rd_rsp_valid;
  logic [DATA_W-1:0] rd_rsp_data;
  logic out_valid, out_ready;
  logic [DATA_W-1:0] out_data;
  int checks = 0, failures = 0, cycle = 0;

  ca_read_dma #(.FIFO_DEPTH(32)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [DATA_W-1:0] mem_word(logic [ADDR_W-1:0] a);
    return {a[31:0] ^ 32'hA5A5_0000, ~a[31:0]};
  endfunction

  // host memory model: FIFO of accepted requests, each released after LAT
  int lat_min = 0, lat_max = 0, ready_pct = 100, out_pct = 100;
  typedef struct { logic [ADDR_W-1:0] a; int due; } req_t;
  req_t pend[$];
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rd_req_valid && rd_req_ready)
      pend.push_back('{a: rd_req_addr, due: cycle + $urandom_range(lat_min, lat_max)});
  end
  always @(negedge clk) begin
    rd_req_ready = ($urandom_range(1, 100) <= ready_pct);
    out_ready    = ($urandom_range(1, 100) <= out_pct);
    rd_rsp_valid = 0;
    if (pend.size() != 0 && pend[0].due <= cycle) begin
      req_t r;
      r = pend.pop_front();
      rd_rsp_valid = 1;
      rd_rsp_data  = mem_word(r.a);
    end
  end

  // consumer checks order and content
  logic [ADDR_W-1:0] next_a;
  int got;
  always @(posedge clk) begin
    if (!rst && out_valid && out_ready) begin
      checks++;
      if (out_data !== mem_word(next_a)) begin
        failures++; $display("MISMATCH word %0d: %h exp %h", got, out_data, mem_word(next_a));
      end
      next_a <= next_a + 8;
      got++;
    end
  end

  initial begin
    repeat (300000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [ADDR_W-1:0] a, int words, output int cycles);
    int t0;
    @(negedge clk);
    rd_addr = a; rd_bytes = ADDR_W'(words * 8);
    next_a = a; got = 0;
    start = 1; @(negedge clk); start = 0;
    t0 = cycle;
    while (busy) @(negedge clk);
    cycles = cycle - t0;
    checks++;
    if (got != words) begin failures++; $display("got %0d of %0d words", got, words); end
  endtask

  initial begin
    int c;
    rd_addr = 0; rd_bytes = 0; rd_rsp_data = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    // full rate: 1000 words, no latency, no back-pressure
    run(40'h10_0000_0000, 1000, c);
    checks++;
    if (c > 1000 + 4) begin failures++; $display("full rate run took %0d cycles for 1000 words", c); end
    // latency within the credit window still gives full rate
    lat_min = 8; lat_max = 8;
    run(40'h00_0000_1000, 1000, c);
    checks++;
    if (c > 1000 + 12) begin failures++; $display("latency-8 run took %0d cycles", c); end
    // random latency, refusals and back-pressure
    lat_min = 0; lat_max = 40; ready_pct = 70; out_pct = 60;
    for (int k = 0; k < 5; k++) run(ADDR_W'($urandom) << 3, $urandom_range(1, 700), c);
    run(40'h0, 1, c);
    // stop: fewer words than asked, all of them in order
    lat_min = 2; lat_max = 10; ready_pct = 100; out_pct = 100;
    @(negedge clk);
    rd_addr = 40'h2000; rd_bytes = 40'd80000; next_a = 40'h2000; got = 0;
    start = 1; @(negedge clk); start = 0;
    repeat (50) @(negedge clk);
    stop = 1; @(negedge clk); stop = 0;
    while (busy) @(negedge clk);
    checks++;
    if (got < 40 || got > 100) begin failures++; $display("stop: %0d words delivered", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
