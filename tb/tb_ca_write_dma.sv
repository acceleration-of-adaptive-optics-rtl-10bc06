// tb_ca_write_dma: self-checking test of the output FIFO and host writer.
// A producer pushes numbered words whenever the FIFO is not full, while
// the host write channel accepts with random readiness. Checks each word
// appears once, in order, at consecutive 8-byte addresses from the start
// address; that address and data hold while the host is not ready; that
// full rises when the host stops accepting; and one write per clock when
// the host is always ready.
module tb_ca_write_dma;
  import ca_pkg::*;
  logic clk = 0, rst = 1, start = 0;
  logic [ADDR_W-1:0] wr_addr;
  logic in_valid = 0;
  logic [DATA_W-1:0] in_data;
  logic full, busy, wr_done, wr_valid, wr_ready;
  logic [ADDR_W-1:0] wr_req_addr;
  logic [DATA_W-1:0] wr_data;
  int checks = 0, failures = 0, cycle = 0;

  ca_write_dma #(.FIFO_DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  int ready_pct = 100, n_wr = 0, n_in = 0, n_full = 0, n_done = 0;
  logic [ADDR_W-1:0] base;
  logic [ADDR_W-1:0] h_addr;
  logic [DATA_W-1:0] h_data;
  logic h_wait = 0;

  always @(negedge clk) wr_ready = ($urandom_range(1, 100) <= ready_pct);

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (full) n_full++;
    if (wr_done) n_done++;
    if (h_wait) begin
      checks++;
      if (!wr_valid || wr_req_addr !== h_addr || wr_data !== h_data) begin
        failures++; $display("write channel changed while waiting");
      end
    end
    h_wait <= !rst && wr_valid && !wr_ready;
    h_addr <= wr_req_addr; h_data <= wr_data;
    if (wr_valid && wr_ready) begin
      checks++;
      if (wr_req_addr !== base + ADDR_W'(8 * n_wr) || wr_data !== {32'(n_wr), ~32'(n_wr)}) begin
        failures++; $display("MISMATCH write %0d at %h data %h", n_wr, wr_req_addr, wr_data);
      end
      n_wr++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [ADDR_W-1:0] a, int words, int rpct, int ppct, output int cycles);
    int t0;
    @(negedge clk);
    ready_pct = rpct; base = a; n_wr = 0; n_in = 0;
    wr_addr = a; start = 1; @(negedge clk); start = 0;
    t0 = cycle;
    while (n_in < words) begin
      in_valid = !full && ($urandom_range(1, 100) <= ppct);
      in_data  = {32'(n_in), ~32'(n_in)};
      if (in_valid) n_in++;
      @(negedge clk);
    end
    in_valid = 0;
    while (busy) @(negedge clk);
    cycles = cycle - t0;
    checks++;
    if (n_wr != words) begin failures++; $display("wrote %0d of %0d", n_wr, words); end
  endtask

  initial begin
    int c;
    wr_addr = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    run(40'h00_0004_0000, 500, 100, 100, c);
    checks++;
    if (c > 500 + 3) begin failures++; $display("full-rate run took %0d cycles", c); end
    n_full = 0;
    run(40'h12_3456_7800, 2000, 30, 100, c);
    checks++;
    if (n_full == 0) begin failures++; $display("FIFO never filled under back-pressure"); end
    run(40'h00_0000_0008, 2000, 70, 50, c);
    checks++;
    if (n_done != 4500) begin failures++; $display("wr_done pulses %0d", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
