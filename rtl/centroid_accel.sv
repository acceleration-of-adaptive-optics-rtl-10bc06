// centroid_accel: FPGA centroid accelerator for Shack-Hartmann wavefront
// sensor simulation.
//
// Host software writes a run description into the registers (pixel buffer
// address and length, result address, sub-aperture size Nx x Ny, pixel
// weighting) and starts the run. The accelerator then, without further CPU
// help, streams the 16-bit pixels from host memory at 8 bytes per clock,
// weights them, accumulates sum(w), sum(x w), sum(y w) per sub-aperture,
// divides to get the mean position in fixed point, converts it to 32-bit
// float, subtracts the centre offset (N-1)/2 in floating point and writes
// the x,y pair back to host memory. Many sub-apertures are processed by one start command.
//
//   host mem --rd--> ca_read_dma --> ca_pixel_weight --> ca_accum
//        --> 2 x ca_divider --> 2 x ca_fix2float --> 2 x ca_fp_offset
//        --> ca_write_dma --wr--> host mem
//   host CPU --reg--> ca_regs (configuration, start/stop, status)
//
// Flow control is one global advance signal: every pipeline stage moves
// only while the output FIFO has room, and the read side is popped only on
// those cycles; bubbles travel as words with valid low. Throughput is one
// 64-bit word (four pixels) per clock whatever the sub-aperture size;
// latency from the last word of a sub-aperture entering the pipeline to
// its result entering the output FIFO is 26 + 1 + 38 + 2 + 2 = 69 clocks with
// the default sizes. The host bus (reg_*, rd_*, wr_*) is a generic
// valid/ready stand-in for the vendor interconnect core of the original
// system. The structure follows the paper; widths, encodings, buffer
// depths and the bus protocol are this design's choices.
module centroid_accel
  import ca_pkg::*;
#(
  parameter int unsigned MAX_N         = 32,
  parameter int unsigned FRAC_W        = 32,
  parameter int unsigned RD_FIFO_DEPTH = 32,
  parameter int unsigned WR_FIFO_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst,
  // host register access (FPGA as bus slave)
  input  logic              reg_we,
  input  logic [3:0]        reg_addr,
  input  logic [63:0]       reg_wdata,
  output logic [63:0]       reg_rdata,
  output logic              busy,         // a run is in progress
  // host memory read (FPGA as bus master)
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_rsp_valid,
  input  logic [DATA_W-1:0] rd_rsp_data,
  // host memory write
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [DATA_W-1:0] wr_data
);
  localparam int unsigned PW    = $clog2(MAX_N);
  localparam int unsigned SW    = WGT_W + 2 * PW;
  localparam int unsigned SXW   = SW + PW;
  localparam int unsigned QW    = PW + FRAC_W;

  cfg_t cfg;
  logic start, stop;
  logic pipe_idle, centroid_done;
  logic adv;

  // ---------------- control
  ca_regs u_regs (
    .clk, .rst, .reg_we, .reg_addr, .reg_wdata, .reg_rdata,
    .cfg, .start, .stop, .busy, .pipe_idle, .centroid_done
  );

  // ---------------- read DMA
  logic              rd_busy, px_valid;
  logic [DATA_W-1:0] px_word;
  ca_read_dma #(.FIFO_DEPTH(RD_FIFO_DEPTH)) u_rd (
    .clk, .rst, .start, .stop,
    .rd_addr (cfg.rd_addr),
    .rd_bytes(cfg.rd_bytes),
    .busy    (rd_busy),
    .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_rsp_valid, .rd_rsp_data,
    .out_valid(px_valid),
    .out_data (px_word),
    .out_ready(adv)
  );

  // ---------------- weighting
  logic                        w_valid, w_busy;
  logic [LANES-1:0][WGT_W-1:0] w_word;
  ca_pixel_weight u_wgt (
    .clk, .rst, .en(adv), .mode(cfg.mode),
    .in_valid(px_valid),
    .in_pix  (px_word),
    .out_valid(w_valid),
    .out_w    (w_word),
    .busy     (w_busy)
  );

  // ---------------- accumulation
  logic           s_valid;
  logic [SW-1:0]  s_w;
  logic [SXW-1:0] s_xw, s_yw;
  ca_accum #(.MAX_N(MAX_N)) u_acc (
    .clk, .rst, .en(adv), .clear(start),
    .nx(cfg.nx), .ny(cfg.ny),
    .in_valid(w_valid), .in_w(w_word),
    .out_valid(s_valid), .sum_w(s_w), .sum_xw(s_xw), .sum_yw(s_yw)
  );

  // ---------------- division, x and y in lock step
  wire            s_zero = (s_w == '0);
  logic           qx_valid, qy_valid, qx_sticky, qy_sticky, qx_zero, qy_zero;
  logic           dx_busy, dy_busy;
  logic [QW-1:0]  qx, qy;
  ca_divider #(.NUM_W(SXW), .DEN_W(SW), .INT_W(PW), .FRAC_W(FRAC_W), .TAG_W(1)) u_divx (
    .clk, .rst, .en(adv), .in_valid(s_valid), .num(s_xw), .den(s_w), .in_tag(s_zero),
    .out_valid(qx_valid), .quo(qx), .sticky(qx_sticky), .out_tag(qx_zero), .busy(dx_busy)
  );
  ca_divider #(.NUM_W(SXW), .DEN_W(SW), .INT_W(PW), .FRAC_W(FRAC_W), .TAG_W(1)) u_divy (
    .clk, .rst, .en(adv), .in_valid(s_valid), .num(s_yw), .den(s_w), .in_tag(s_zero),
    .out_valid(qy_valid), .quo(qy), .sticky(qy_sticky), .out_tag(qy_zero), .busy(dy_busy)
  );

  // ---------------- conversion to float, then centre offset
  logic            gx_valid, gy_valid, gx_busy, gy_busy;
  logic [FP_W-1:0] gx, gy;
  ca_fix2float #(.INT_W(PW), .FRAC_W(FRAC_W)) u_cvx (
    .clk, .rst, .en(adv), .in_valid(qx_valid), .quo(qx), .sticky(qx_sticky),
    .zero_den(qx_zero), .out_valid(gx_valid), .fp(gx), .busy(gx_busy)
  );
  ca_fix2float #(.INT_W(PW), .FRAC_W(FRAC_W)) u_cvy (
    .clk, .rst, .en(adv), .in_valid(qy_valid), .quo(qy), .sticky(qy_sticky),
    .zero_den(qy_zero), .out_valid(gy_valid), .fp(gy), .busy(gy_busy)
  );

  logic            fx_valid, fy_valid, fx_busy, fy_busy;
  logic [FP_W-1:0] fx, fy;
  ca_fp_offset #(.INT_W(PW), .FRAC_W(FRAC_W)) u_offx (
    .clk, .rst, .en(adv), .in_valid(gx_valid), .a(gx), .nm1(cfg.nx - 1'b1),
    .out_valid(fx_valid), .fp(fx), .busy(fx_busy)
  );
  ca_fp_offset #(.INT_W(PW), .FRAC_W(FRAC_W)) u_offy (
    .clk, .rst, .en(adv), .in_valid(gy_valid), .a(gy), .nm1(cfg.ny - 1'b1),
    .out_valid(fy_valid), .fp(fy), .busy(fy_busy)
  );

  // ---------------- write DMA
  logic wr_full, wr_busy;
  ca_write_dma #(.FIFO_DEPTH(WR_FIFO_DEPTH)) u_wr (
    .clk, .rst, .start,
    .wr_addr (cfg.wr_addr),
    .in_valid(fx_valid && adv),
    .in_data ({fy, fx}),
    .full    (wr_full),
    .busy    (wr_busy),
    .wr_done (centroid_done),
    .wr_valid, .wr_ready, .wr_req_addr(wr_addr), .wr_data
  );

  // global advance: the pipeline moves whenever its results have room
  assign adv = !wr_full;

  assign pipe_idle = !(rd_busy || w_busy || s_valid || dx_busy || dy_busy ||
                       gx_busy || gy_busy || fx_busy || fy_busy || wr_busy);

  a_xy_lockstep: assert property (@(posedge clk) disable iff (rst)
    fx_valid == fy_valid && gx_valid == gy_valid && qx_valid == qy_valid);
endmodule
