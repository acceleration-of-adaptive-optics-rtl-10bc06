// tb_centroid_accel: end-to-end test of the centroid accelerator at its
// default parameters.
//
// The accelerator is connected to a behavioural host memory. Each job
// fills host memory with random sub-aperture images, programs the
// registers, starts the run and polls the status register until done.
// The reference walks the pixels one at a time: weight (p, floor(p^1.5) or
// p^2), sums, the exact quotient floor(sum(xw) * 2^32 / sum(w)) with its
// remainder flag, rounding to single precision, and the centre offset
// subtracted in single precision.
// Every centroid pair written to host memory, the count register and the
// absence of stray writes are checked.
//
// Mechanisms that must occur at least once (each is counted; one that never
// occurs is a failure): host read refusals, pipeline stalls from a full
// output FIFO, idle pipeline cycles waiting for data, a sub-aperture ending
// inside a 4-pixel word, each of the three weightings, an empty
// sub-aperture (NaN), a stop command, and several sub-apertures per start.
// A job with an always-ready host checks the 8-bytes-per-clock rate.
module tb_centroid_accel;
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
  int m_refuse = 0, m_stall = 0, m_bubble = 0, m_midword = 0, m_nan = 0, m_stop = 0, m_multi = 0;
  int m_mode[3] = '{0, 0, 0};

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst && dut.busy) begin
      if (!dut.adv) m_stall++;
      if (dut.adv && !dut.px_valid && dut.u_rd.busy) m_bubble++;
      if (dut.adv && dut.w_valid && dut.u_acc.any_last && !dut.u_acc.last[LANES-1]) m_midword++;
    end
  end

  initial begin
    repeat (3000000) @(posedge clk); failures++;
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

  initial begin
    int c;
    repeat (4) @(posedge clk);
    rst <= 0;
    // ideal host: rate of 8 bytes per clock, 4x4 sub-apertures as in the paper
    host.lat_min = 10; host.lat_max = 10; host.rd_pct = 100; host.wr_pct = 100;
    job(40'h01_0000_0000, 4096, 40'h02_0000_0000, 4, 4, WGT_NONE, 1, -1, c);
    checks++;
    $display("4096 words (32 KB) of 4x4 sub-apertures: %0d clocks", c);
    if (c > 4096 + 120) begin failures++; $display("rate too low: %0d clocks", c); end
    // sizes and weightings with an irregular host
    host.lat_min = 0; host.lat_max = 30; host.rd_pct = 60; host.wr_pct = 40;
    m_refuse = host.n_rd_refused;
    job(40'h00_1000_0000, 600, 40'h00_2000_0000, 3, 3, WGT_P2, 0, -1, c);
    job(40'h00_1000_0008, 900, 40'h00_2000_0100, 32, 32, WGT_P1_5, 1, -1, c);
    job(40'h00_1000_1000, 500, 40'h00_2000_1000, 5, 7, WGT_NONE, 2, -1, c);
    job(40'h00_1000_2000, 300, 40'h00_2000_2000, 2, 2, WGT_P1_5, 0, -1, c);
    host.wr_pct = 5;   // slow writes: output FIFO fills, pipeline stalls
    job(40'h00_1000_3000, 400, 40'h00_2000_3000, 2, 3, WGT_P2, 0, -1, c);
    host.wr_pct = 80;
    job(40'h00_1000_4000, 700, 40'h00_2000_4000, 17, 9, WGT_NONE, 1, -1, c);
    job(40'h00_1000_5000, 3000, 40'h00_2000_5000, 8, 8, WGT_P2, 1, 200, c);
    job(40'h00_1000_6000, 64, 40'h00_2000_6000, 4, 4, WGT_NONE, 0, -1, c);
    m_refuse = host.n_rd_refused - m_refuse;
    $display("mechanisms: read refusals %0d, output-full stalls %0d, data bubbles %0d, mid-word ends %0d",
             m_refuse, m_stall, m_bubble, m_midword);
    $display("            modes %0d/%0d/%0d, NaN results %0d, stops %0d, multi-sub-aperture runs %0d",
             m_mode[0], m_mode[1], m_mode[2], m_nan, m_stop, m_multi);
    checks++; if (m_refuse == 0)  begin failures++; $display("no read refusal"); end
    checks++; if (m_stall == 0)   begin failures++; $display("no pipeline stall"); end
    checks++; if (m_bubble == 0)  begin failures++; $display("no data bubble"); end
    checks++; if (m_midword == 0) begin failures++; $display("no mid-word sub-aperture end"); end
    checks++; if (m_mode[0] == 0 || m_mode[1] == 0 || m_mode[2] == 0) begin failures++; $display("a weighting unused"); end
    checks++; if (m_nan == 0)     begin failures++; $display("no empty sub-aperture"); end
    checks++; if (m_stop == 0)    begin failures++; $display("no stop"); end
    checks++; if (m_multi == 0)   begin failures++; $display("no multi-sub-aperture run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
