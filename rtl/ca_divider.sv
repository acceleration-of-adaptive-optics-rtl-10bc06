// ca_divider: fully pipelined unsigned fixed-point divider.
//
// Computes quo = floor(num * 2^FRAC_W / den), an unsigned fixed-point
// number with INT_W integer and FRAC_W fraction bits, and sticky = 1 when
// the division left a remainder (the true quotient is larger than quo).
// This is the "divide by the sum of all photons to give a fixed point
// number" step of the centroid; the caller guarantees num < den * 2^INT_W,
// which holds for a centroid because the mean position is below N.
//
// Restoring long division, one quotient bit per pipeline stage: the
// partial remainder starts as num >> INT_W (already below den) and each
// stage shifts in the next dividend bit and subtracts den when it fits.
// den and a TAG_W-bit side field travel with each operand pair. A new
// division can start every cycle; latency is INT_W + FRAC_W + 1 clocks.
// den = 0 gives an all-ones quotient that the caller must ignore.
// The original design used a vendor division library; this structure and
// the 32 fraction bits are this design's choice.
module ca_divider #(
  parameter int unsigned NUM_W  = 47,
  parameter int unsigned DEN_W  = 42,
  parameter int unsigned INT_W  = 5,
  parameter int unsigned FRAC_W = 32,
  parameter int unsigned TAG_W  = 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic                    in_valid,
  input  logic [NUM_W-1:0]        num,
  input  logic [DEN_W-1:0]        den,
  input  logic [TAG_W-1:0]        in_tag,
  output logic                    out_valid,
  output logic [INT_W+FRAC_W-1:0] quo,
  output logic                    sticky,
  output logic [TAG_W-1:0]        out_tag,
  output logic                    busy
);
  localparam int unsigned QW  = INT_W + FRAC_W;

  logic             vld [QW+1];
  logic [DEN_W-1:0] rem [QW+1];
  logic [QW-1:0]    bits[QW+1];   // dividend bits still to shift in, MSB first
  logic [QW-1:0]    q   [QW+1];
  logic [DEN_W-1:0] dv  [QW+1];
  logic [TAG_W-1:0] tg  [QW+1];

  always_ff @(posedge clk) begin
    if (rst) vld[0] <= 1'b0;
    else if (en) vld[0] <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (en) begin
      rem[0]  <= DEN_W'(num >> INT_W);
      bits[0] <= {num[INT_W-1:0], {FRAC_W{1'b0}}};
      q[0]    <= '0;
      dv[0]   <= den;
      tg[0]   <= in_tag;
    end
  end

  for (genvar s = 1; s <= QW; s++) begin : g_stage
    logic [DEN_W:0] trial;
    assign trial = {rem[s-1], bits[s-1][QW-1]};
    always_ff @(posedge clk) begin
      if (rst) vld[s] <= 1'b0;
      else if (en) vld[s] <= vld[s-1];
    end
    always_ff @(posedge clk) begin
      if (en) begin
        bits[s] <= bits[s-1] << 1;
        dv[s]   <= dv[s-1];
        tg[s]   <= tg[s-1];
        if (trial >= {1'b0, dv[s-1]}) begin
          rem[s] <= DEN_W'(trial - {1'b0, dv[s-1]});
          q[s]   <= {q[s-1][QW-2:0], 1'b1};
        end else begin
          rem[s] <= DEN_W'(trial);
          q[s]   <= {q[s-1][QW-2:0], 1'b0};
        end
      end
    end
  end

  assign out_valid = vld[QW];
  assign quo       = q[QW];
  assign sticky    = (rem[QW] != '0);
  assign out_tag   = tg[QW];

  always_comb begin
    busy = 1'b0;
    for (int s = 0; s <= QW; s++) busy |= vld[s];
  end

  a_in_range: assert property (@(posedge clk) disable iff (rst)
    en && in_valid && den != 0 |-> (num >> INT_W) < NUM_W'(den));
endmodule
