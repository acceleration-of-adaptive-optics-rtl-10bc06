// tb_ca_workloads: the data sets of the paper's timing measurements, run
// through the accelerator at its default parameters with an always-ready
// host memory of fixed latency.
//
//   * 2 MB of 4x4-pixel sub-apertures (65536 centroids), the largest data
//     set of the timing and speed-up plots;
//   * the 4 KB block quoted as the smallest useful one, both as 128 4x4
//     sub-apertures and as two 32x32 sub-apertures;
//   * the sub-aperture size sweep, 4x4 to 32x32 in steps of 4, each over
//     the same 2 MB (1 Mpixel) of data.
// Every centroid is checked against the same reference as the end-to-end
// test, and the clock count of each run is checked against the bandwidth
// bound of one 8-byte word per clock plus a fixed pipeline latency,
// independent of the sub-aperture size. The time per byte at 100 MHz and
// 170 MHz is printed for comparison with the measured slopes.
module tb_ca_workloads;
  import ca_pkg::*;
  logic clk = 0, rst = 1;
  logic reg_we = 0;
  logic [3:0] reg_addr = 0;
  logic [63:0] reg_wdata = 0, reg_rdata;
  logic busy;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  logic [ADDR_W-1:0] rd_req_addr, wr_addr;
  logic [DATA_W-1:0] rd_rsp_data, wr_data;

  centroid_accel dut (.*);
  ca_host_model host (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  int m_nan = 0, m_stop = 0, m_multi = 0;
  int m_mode[3] = '{0, 0, 0};

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (5000000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model
  function automatic longint weight(int p, wgt_mode_e m);
    longint c, r;
    case (m)
      WGT_P2:   return longint'(p) * p;
      WGT_P1_5: begin
        c = longint'(p) * p * p;
        r = longint'($floor($sqrt(real'(c))));
        while (r * r > c) r--;
        while ((r + 1) * (r + 1) <= c) r++;
        return r;
      end
      default:  return longint'(p);
    endcase
  endfunction

  // positive m * 2^-scale to single, round to nearest even
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

  // centroid of one axis from the sums: the quotient with 32 fraction bits
  // and remainder flag, rounded to single, then minus (n-1)/2 in single
  function automatic logic [31:0] cent(longint sp, longint sw, int n);
    logic [127:0] num, q, rm;
    logic [31:0] f;
    longint ax, d;
    if (sw == 0) return 32'h7FC0_0000;
    num = 128'(sp) << 32;
    q   = num / 128'(sw);
    rm  = num % 128'(sw);
    if (q == 0)                f = 32'h0;
    else if (q >= (1 << 24))   f = i2f(1'b0, (longint'(q) << 1) | longint'(rm != 0), 33);
    else                       f = i2f(1'b0, longint'(q), 32);
    // exact difference at 2^-55 resolution
    ax = (f == 0) ? 0 : longint'({1'b1, f[22:0]}) << (int'(f[30:23]) - 127 - 23 + 55);
    d  = ax - ((longint'(n) - 1) <<< 54);
    if (d == 0) return 32'h0;
    return (d < 0) ? i2f(1'b1, -d, 55) : i2f(1'b0, d, 55);
  endfunction

  // ---------------- register access
  task automatic wreg(reg_idx_e a, logic [63:0] d);
    @(negedge clk); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rreg(reg_idx_e a, output logic [63:0] d);
    @(negedge clk); reg_addr = a; #1 d = reg_rdata;
  endtask

  // ---------------- one job
  // kind: 0 random pixels, 1 spot plus noise, 2 some empty sub-apertures
  task automatic job(logic [ADDR_W-1:0] rbase, int words, logic [ADDR_W-1:0] wbase,
                     int nx, int ny, wgt_mode_e mode, int kind, int stop_at,
                     output int cycles);
    int npix, nsub, sub, nexp;
    int pix[];
    longint sw, sx, sy;
    logic [31:0] ex[$], ey[$];
    logic [63:0] st, cnt;
    int t0;
    npix = words * LANES;
    pix  = new[npix];
    nsub = npix / (nx * ny);
    for (int i = 0; i < npix; i++) begin
      int s = i / (nx * ny), k = i % (nx * ny);
      int x = k % nx, y = k / nx;
      case (kind)
        1: pix[i] = ((x - s % nx) * (x - s % nx) + (y - s % ny) * (y - s % ny) < 3) ? $urandom_range(20000, 65535)
                                                                                 : $urandom_range(0, 300);
        2: pix[i] = (s % 3 == 1) ? 0 : $urandom_range(0, 65535);
        default: pix[i] = $urandom_range(0, 65535);
      endcase
    end
    for (int w = 0; w < words; w++)
      host.rmem[rbase + ADDR_W'(8 * w)] = {16'(pix[4*w+3]), 16'(pix[4*w+2]), 16'(pix[4*w+1]), 16'(pix[4*w])};
    for (int s = 0; s < nsub; s++) begin
      sw = 0; sx = 0; sy = 0;
      for (int k = 0; k < nx * ny; k++) begin
        longint wt = weight(pix[s * nx * ny + k], mode);
        sw += wt; sx += wt * {32'd0, k % nx}; sy += wt * {32'd0, k / nx};
      end
      ex.push_back(cent(sx, sw, nx));
      ey.push_back(cent(sy, sw, ny));
    end
    host.wmem.delete();
    host.n_writes = 0;
    wreg(REG_RD_ADDR, 64'(rbase));
    wreg(REG_RD_BYTES, 64'(words * 8));
    wreg(REG_WR_ADDR, 64'(wbase));
    wreg(REG_NX, 64'(nx));
    wreg(REG_NY, 64'(ny));
    wreg(REG_WEIGHT, 64'(mode));
    wreg(REG_CTRL, 64'd1);
    t0 = cycle;
    if (stop_at >= 0) begin
      repeat (stop_at) @(negedge clk);
      wreg(REG_CTRL, 64'd2);
      m_stop++;
    end
    do rreg(REG_STATUS, st); while (st[0]);
    cycles = cycle - t0;
    rreg(REG_COUNT, cnt);
    checks++;
    if (st != 64'h2) begin failures++; $display("status %h after run", st); end
    nexp = (stop_at >= 0) ? int'(cnt) : nsub;
    checks++;
    if (int'(cnt) != nexp || host.n_writes != nexp || (stop_at >= 0 && nexp >= nsub)) begin
      failures++; $display("count %0d writes %0d expected %0d of %0d", cnt, host.n_writes, nexp, nsub);
    end
    for (int s = 0; s < nexp && s < nsub; s++) begin
      logic [63:0] got;
      got = host.wmem.exists(wbase + ADDR_W'(8 * s)) ? host.wmem[wbase + ADDR_W'(8 * s)] : 64'hDEAD;
      checks++;
      if (got !== {ey[s], ex[s]}) begin
        failures++;
        if (failures < 10) $display("sub %0d (%0dx%0d mode %0d): got %h expected %h", s, nx, ny, mode, got, {ey[s], ex[s]});
      end
      if (ex[s] == 32'h7FC0_0000) m_nan++;
    end
    if (nsub > 1 && stop_at < 0) m_multi++;
    m_mode[mode]++;
    for (int w = 0; w < words; w++) host.rmem.delete(rbase + ADDR_W'(8 * w));
  endtask

  localparam int LAT_BOUND = 150;   // pipeline + host latency, clocks

  task automatic timed(int words, int n, wgt_mode_e mode, string name);
    int c;
    job(40'h01_0000_0000, words, 40'h04_0000_0000, n, n, mode, 1, -1, c);
    $display("%-34s %7d bytes %8d clocks  %.3f ns/byte at 100 MHz, %.3f at 170 MHz",
             name, words * 8, c, 10.0 * c / (words * 8), 1000.0 / 170.0 * c / (words * 8));
    checks++;
    if (c > words + LAT_BOUND) begin failures++; $display("  slower than one word per clock"); end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst <= 0;
    host.lat_min = 20; host.lat_max = 20; host.rd_pct = 100; host.wr_pct = 100;
    timed(512, 4, WGT_NONE, "4 KB, 128 x (4x4)");
    timed(512, 32, WGT_NONE, "4 KB, 2 x (32x32)");
    timed(262144, 4, WGT_NONE, "2 MB, 4x4");
    for (int n = 8; n <= 32; n += 4) timed(262144, n, WGT_NONE, $sformatf("2 MB, %0dx%0d", n, n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
