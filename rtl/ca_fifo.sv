// ca_fifo: synchronous first-in first-out buffer with show-ahead output.
//
// The head entry is visible on rd_data whenever empty is low; rd_en pops it.
// A write and a read may happen in the same cycle. count gives the number of
// stored entries so that a producer can reserve space ahead of time (the read
// DMA uses it to limit outstanding requests). Storage is a plain array that
// synthesis maps to distributed or block RAM. Writing when full or reading
// when empty is a protocol error caught by assertions.
module ca_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr_en) wp <= inc(wp);
      if (rd_en) rp <= inc(rp);
      count <= count + (wr_en ? CW'(1) : CW'(0)) - (rd_en ? CW'(1) : CW'(0));
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp] <= wr_data;
  end

  assign rd_data = mem[rp];
  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) wr_en |-> (!full || rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) rd_en |-> !empty);
endmodule
