// ca_host_model: behavioural model of host memory as seen from the
// accelerator's bus-master ports (testbench only, not synthesizable).
//
// Read requests are accepted with probability rd_pct percent each clock and
// answered in order after a latency drawn from lat_min..lat_max clocks,
// from the sparse word array rmem (unset words read as 0). Write requests
// are accepted with probability wr_pct percent and stored in wmem. The
// testbench fills rmem and reads wmem hierarchically and may change the
// knobs between runs. Counters record refused requests so that a test can
// show back-pressure actually occurred.
module ca_host_model
  import ca_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [ADDR_W-1:0] rd_req_addr,
  output logic              rd_rsp_valid,
  output logic [DATA_W-1:0] rd_rsp_data,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [DATA_W-1:0] wr_data
);
  logic [DATA_W-1:0] rmem [logic [ADDR_W-1:0]];
  logic [DATA_W-1:0] wmem [logic [ADDR_W-1:0]];
  int lat_min = 4, lat_max = 4, rd_pct = 100, wr_pct = 100;
  int n_rd_refused = 0, n_wr_refused = 0, n_writes = 0, cycle = 0;

  typedef struct { logic [ADDR_W-1:0] a; int due; } req_t;
  req_t pend[$];

  initial begin
    rd_req_ready = 0; wr_ready = 0; rd_rsp_valid = 0; rd_rsp_data = 0;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst) begin
      if (rd_req_valid && rd_req_ready)
        pend.push_back('{a: rd_req_addr, due: cycle + $urandom_range(lat_min, lat_max)});
      if (rd_req_valid && !rd_req_ready) n_rd_refused++;
      if (wr_valid && wr_ready) begin
        wmem[wr_addr] = wr_data;
        n_writes++;
      end
      if (wr_valid && !wr_ready) n_wr_refused++;
    end
  end

  always @(negedge clk) begin
    rd_req_ready = ($urandom_range(1, 100) <= rd_pct);
    wr_ready     = ($urandom_range(1, 100) <= wr_pct);
    rd_rsp_valid = 0;
    if (!rst && pend.size() != 0 && pend[0].due <= cycle) begin
      req_t r;
      r = pend.pop_front();
      rd_rsp_valid = 1;
      rd_rsp_data  = rmem.exists(r.a) ? rmem[r.a] : '0;
    end
  end
endmodule
