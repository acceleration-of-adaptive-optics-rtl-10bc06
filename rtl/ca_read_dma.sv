// ca_read_dma: bus-master reader that streams the pixel buffer from host
// memory into the centroid pipeline.
//
// On start it fetches rd_bytes/8 consecutive 64-bit words beginning at
// byte address rd_addr, one request per cycle, so that the bus can deliver
// eight bytes every clock as in the paper. Responses return in order, after
// any latency, on rd_rsp_valid/rd_rsp_data, and cannot be refused: a request
// is only issued while the input FIFO has room for it and for every request
// still outstanding (credit scheme). The FIFO's head is presented on
// out_valid/out_data and popped by out_ready.
//
// The host bus is a generic valid/ready request channel plus an in-order
// response channel; on the original hardware it is a closed vendor core.
// stop abandons the words not yet requested; words already requested still
// arrive and are delivered. busy is high while requests remain, responses
// are outstanding, or the FIFO holds data. Byte counts are assumed to be
// multiples of 8 (the low three bits are ignored).
module ca_read_dma
  import ca_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic              stop,
  input  logic [ADDR_W-1:0] rd_addr,
  input  logic [ADDR_W-1:0] rd_bytes,
  output logic              busy,
  // host memory read request
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  // host memory read response, in order
  input  logic              rd_rsp_valid,
  input  logic [DATA_W-1:0] rd_rsp_data,
  // pixel words to the pipeline
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data,
  input  logic              out_ready
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic [ADDR_W-1:0] words_left;
  logic [CW-1:0]     outstanding;
  logic [CW-1:0]     fifo_count;
  logic              fifo_empty, fifo_full;
  logic              stop_pend;

  wire req_fire = rd_req_valid && rd_req_ready;
  wire pop      = out_valid && out_ready;

  // credit check: every outstanding response has a FIFO slot reserved
  wire [CW:0] used = {1'b0, outstanding} + {1'b0, fifo_count};
  assign rd_req_valid = (words_left != 0) && (used < (CW+1)'(FIFO_DEPTH));

  always_ff @(posedge clk) begin
    if (rst) begin
      words_left  <= '0;
      outstanding <= '0;
      rd_req_addr <= '0;
      stop_pend   <= 1'b0;
    end else begin
      outstanding <= outstanding + (req_fire ? CW'(1) : CW'(0)) - (rd_rsp_valid ? CW'(1) : CW'(0));
      if (start) begin
        words_left  <= rd_bytes >> 3;
        rd_req_addr <= {rd_addr[ADDR_W-1:3], 3'b000};
        stop_pend   <= 1'b0;
      end else begin
        if (req_fire) begin
          words_left  <= words_left - 1'b1;
          rd_req_addr <= rd_req_addr + ADDR_W'(8);
        end
        // a stop never withdraws a request the bus has not yet accepted
        if ((stop || stop_pend) && !(rd_req_valid && !rd_req_ready)) begin
          words_left <= '0;
          stop_pend  <= 1'b0;
        end else if (stop) begin
          stop_pend  <= 1'b1;
        end
      end
    end
  end

  ca_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst,
    .wr_en  (rd_rsp_valid),
    .wr_data(rd_rsp_data),
    .rd_en  (pop),
    .rd_data(out_data),
    .empty  (fifo_empty),
    .full   (fifo_full),
    .count  (fifo_count)
  );

  assign out_valid = !fifo_empty;
  assign busy      = (words_left != 0) || (outstanding != 0) || !fifo_empty;

  a_req_stable: assert property (@(posedge clk) disable iff (rst)
    rd_req_valid && !rd_req_ready |=> rd_req_valid && $stable(rd_req_addr));
  a_no_unrequested_rsp: assert property (@(posedge clk) disable iff (rst)
    rd_rsp_valid |-> outstanding != 0);
  a_rsp_has_room: assert property (@(posedge clk) disable iff (rst)
    rd_rsp_valid |-> !fifo_full);
endmodule
