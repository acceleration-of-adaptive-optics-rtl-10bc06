// ca_write_dma: output buffer and bus-master writer for the centroids.
//
// Each finished sub-aperture delivers one 64-bit word, x centroid in bits
// [31:0] and y centroid in bits [63:32] (the x value at the lower address;
// this ordering is this design's choice). Words are queued in a FIFO and
// written to consecutive 8-byte host addresses starting at wr_addr, latched
// at start. The write channel is valid/ready: wr_valid stays high with
// stable address and data until wr_ready accepts the word. full tells the
// centroid pipeline to stall, so no result is ever dropped when the host
// bus is slow. wr_done pulses once per accepted word; busy is high while
// the FIFO holds data.
module ca_write_dma
  import ca_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic              in_valid,
  input  logic [DATA_W-1:0] in_data,
  output logic              full,
  output logic              busy,
  output logic              wr_done,
  // host memory write channel
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_req_addr,
  output logic [DATA_W-1:0] wr_data
);
  logic empty;
  logic [$clog2(FIFO_DEPTH+1)-1:0] count;

  wire fire = wr_valid && wr_ready;

  ca_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst,
    .wr_en  (in_valid),
    .wr_data(in_data),
    .rd_en  (fire),
    .rd_data(wr_data),
    .empty  (empty),
    .full   (full),
    .count  (count)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_req_addr <= '0;
    end else if (start) begin
      wr_req_addr <= {wr_addr[ADDR_W-1:3], 3'b000};
    end else if (fire) begin
      wr_req_addr <= wr_req_addr + ADDR_W'(8);
    end
  end

  assign wr_valid = !empty;
  assign wr_done  = fire;
  assign busy     = !empty;

  a_hold: assert property (@(posedge clk) disable iff (rst)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_req_addr) && $stable(wr_data));
  a_no_drop: assert property (@(posedge clk) disable iff (rst) in_valid |-> !full);
endmodule
