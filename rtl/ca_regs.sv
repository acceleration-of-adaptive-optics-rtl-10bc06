// ca_regs: host-visible control registers and run controller.
//
// Host software, with the FPGA acting as bus slave, writes the run
// parameters: where the pixel buffer starts in host memory, how many bytes
// to read, where to write the centroids, the sub-aperture size Nx x Ny and
// the pixel weighting. Writing 1 to CTRL starts a run, writing 2 stops it.
// These user controls are the ones the paper lists; the register layout
// (see ca_pkg::reg_idx_e), the status/count registers and the stop
// semantics are this design's choice.
//
// Run control: IDLE -> RUN on a start command (a one-cycle start pulse goes
// to the engines and the configuration is frozen in cfg). In RUN, a stop
// command raises stop for one cycle; the run ends when the datapath reports
// pipe_idle after the read engine has finished, and STATUS.done is set.
// Register writes other than CTRL are ignored while busy. Reads are
// combinational from reg_addr. centroid_done pulses count written pairs.
module ca_regs
  import ca_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  // host register port
  input  logic              reg_we,
  input  logic [3:0]        reg_addr,
  input  logic [63:0]       reg_wdata,
  output logic [63:0]       reg_rdata,
  // to the engines
  output cfg_t              cfg,
  output logic              start,
  output logic              stop,
  output logic              busy,
  // from the engines
  input  logic              pipe_idle,
  input  logic              centroid_done
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN} state_e;
  state_e      state;
  logic        done;
  logic [63:0] count;

  wire cmd_start = reg_we && reg_addr == REG_CTRL && reg_wdata[0];
  wire cmd_stop  = reg_we && reg_addr == REG_CTRL && reg_wdata[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      done  <= 1'b0;
      count <= '0;
      start <= 1'b0;
      stop  <= 1'b0;
      cfg   <= '{rd_addr: '0, rd_bytes: '0, wr_addr: '0, nx: NSZ_W'(4),
                 ny: NSZ_W'(4), mode: WGT_NONE};
    end else begin
      start <= 1'b0;
      stop  <= 1'b0;
      if (centroid_done) count <= count + 1'b1;
      unique case (state)
        S_IDLE: begin
          if (reg_we) begin
            unique case (reg_addr)
              REG_RD_ADDR:  cfg.rd_addr  <= reg_wdata[ADDR_W-1:0];
              REG_RD_BYTES: cfg.rd_bytes <= reg_wdata[ADDR_W-1:0];
              REG_WR_ADDR:  cfg.wr_addr  <= reg_wdata[ADDR_W-1:0];
              REG_NX:       cfg.nx       <= reg_wdata[NSZ_W-1:0];
              REG_NY:       cfg.ny       <= reg_wdata[NSZ_W-1:0];
              REG_WEIGHT:   cfg.mode     <= wgt_mode_e'(reg_wdata[1:0]);
              default: ;
            endcase
          end
          if (cmd_start) begin
            state <= S_START;
            start <= 1'b1;
            done  <= 1'b0;
            count <= '0;
          end
        end
        // one cycle for the engines to leave their idle state
        S_START: state <= S_RUN;
        S_RUN: begin
          if (cmd_stop) stop <= 1'b1;
          if (pipe_idle) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  always_comb begin
    unique case (reg_addr)
      REG_RD_ADDR:  reg_rdata = 64'(cfg.rd_addr);
      REG_RD_BYTES: reg_rdata = 64'(cfg.rd_bytes);
      REG_WR_ADDR:  reg_rdata = 64'(cfg.wr_addr);
      REG_NX:       reg_rdata = 64'(cfg.nx);
      REG_NY:       reg_rdata = 64'(cfg.ny);
      REG_WEIGHT:   reg_rdata = 64'(cfg.mode);
      REG_STATUS:   reg_rdata = {62'd0, done, busy};
      REG_COUNT:    reg_rdata = count;
      default:      reg_rdata = '0;
    endcase
  end
endmodule
