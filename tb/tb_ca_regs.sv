// tb_ca_regs: self-checking test of the control registers and run control.
// Writes and reads back every configuration register, starts a run and
// checks the start pulse, the frozen configuration while busy, the stop
// pulse, the centroid counter, and that busy falls and done rises only
// after the datapath reports idle.
module tb_ca_regs;
  import ca_pkg::*;
  logic clk = 0, rst = 1;
  logic reg_we = 0;
  logic [3:0] reg_addr;
  logic [63:0] reg_wdata, reg_rdata;
  cfg_t cfg;
  logic start, stop, busy;
  logic pipe_idle = 1, centroid_done = 0;
  int checks = 0, failures = 0;
  int n_start = 0, n_stop = 0;

  ca_regs dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (start) n_start++;
    if (stop) n_stop++;
  end

  task automatic wr(reg_idx_e a, logic [63:0] d);
    @(negedge clk); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask
  task automatic expect_reg(reg_idx_e a, logic [63:0] d, string what);
    @(negedge clk); reg_addr = a; #1;
    checks++;
    if (reg_rdata !== d) begin failures++; $display("%s: read %h expected %h", what, reg_rdata, d); end
  endtask

  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reg_addr = 0; reg_wdata = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    expect_reg(REG_STATUS, 64'h0, "status after reset");
    wr(REG_RD_ADDR, 64'h0000_00AB_CDEF_0120);
    wr(REG_RD_BYTES, 64'd2097152);
    wr(REG_WR_ADDR, 64'h0000_0012_3456_7000);
    wr(REG_NX, 64'd8);
    wr(REG_NY, 64'd6);
    wr(REG_WEIGHT, 64'd1);
    expect_reg(REG_RD_ADDR, 64'h0000_00AB_CDEF_0120, "rd_addr");
    expect_reg(REG_RD_BYTES, 64'd2097152, "rd_bytes");
    expect_reg(REG_WR_ADDR, 64'h0000_0012_3456_7000, "wr_addr");
    expect_reg(REG_NX, 64'd8, "nx");
    expect_reg(REG_NY, 64'd6, "ny");
    expect_reg(REG_WEIGHT, 64'd1, "weight");
    checks++;
    if (cfg.nx != 8 || cfg.ny != 6 || cfg.mode != WGT_P1_5 || cfg.rd_bytes != 2097152) begin
      failures++; $display("cfg outputs wrong");
    end
    // start a run
    pipe_idle = 0;
    wr(REG_CTRL, 64'd1);
    @(negedge clk);
    checks++;
    if (n_start != 1) begin failures++; $display("start pulses: %0d", n_start); end
    expect_reg(REG_STATUS, 64'h1, "status busy");
    // configuration frozen while busy
    wr(REG_NX, 64'd16);
    expect_reg(REG_NX, 64'd8, "nx frozen");
    // count centroids
    repeat (7) begin @(negedge clk); centroid_done = 1; @(negedge clk); centroid_done = 0; end
    expect_reg(REG_COUNT, 64'd7, "count");
    // stop request
    wr(REG_CTRL, 64'd2);
    @(negedge clk);
    checks++;
    if (n_stop != 1) begin failures++; $display("stop pulses: %0d", n_stop); end
    expect_reg(REG_STATUS, 64'h1, "still busy until idle");
    pipe_idle = 1;
    @(negedge clk); @(negedge clk);
    expect_reg(REG_STATUS, 64'h2, "done");
    // a second start clears done and the counter
    pipe_idle = 0;
    wr(REG_CTRL, 64'd1);
    expect_reg(REG_STATUS, 64'h1, "busy again");
    expect_reg(REG_COUNT, 64'd0, "count cleared");
    checks++;
    if (n_start != 2) begin failures++; $display("start pulses: %0d", n_start); end
    pipe_idle = 1;
    repeat (3) @(negedge clk);
    expect_reg(REG_STATUS, 64'h2, "done again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
