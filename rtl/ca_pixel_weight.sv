// ca_pixel_weight: maps each 16-bit pixel to the weighted value used by the
// centroid sums, four pixels (one 64-bit bus word) per clock.
//
// The paper lets the user choose a pixel weighting and names powers 1.5 and
// 2 as the common ones; this unit offers exactly those and no weighting:
//   WGT_NONE: w = p
//   WGT_P1_5: w = floor(p^1.5) = floor(sqrt(p^3))
//   WGT_P2:   w = p^2
// p^3 is formed in the first stage and its square root is taken by a
// digit-by-digit (restoring) integer square root with one result bit per
// pipeline stage, 24 stages for a 48-bit radicand. p and p^2 travel
// alongside so that all three modes have the same latency, LAT = 26 clocks,
// and one word is accepted every cycle. How the power 1.5 is computed is
// this design's choice.
//
// Flow control: the whole pipeline advances only when en is high (the
// global stall); in_valid marks a real word, bubbles carry valid low.
module ca_pixel_weight
  import ca_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  en,
  input  wgt_mode_e             mode,
  input  logic                  in_valid,
  input  logic [LANES-1:0][PIX_W-1:0] in_pix,
  output logic                  out_valid,
  output logic [LANES-1:0][WGT_W-1:0] out_w,
  output logic                  busy
);
  localparam int unsigned RAD_W = 3 * PIX_W;   // 48-bit radicand p^3
  localparam int unsigned RT_W  = RAD_W / 2;   // 24-bit root
  localparam int unsigned NS    = RT_W;        // square-root stages
  localparam int unsigned REM_W = RT_W + 2;

  // per-stage state of one lane
  typedef struct packed {
    logic [RAD_W-1:0] rad;    // remaining radicand bits, consumed from the top
    logic [REM_W-1:0] rem;
    logic [RT_W-1:0]  root;
    logic [WGT_W-1:0] p;      // unweighted pixel
    logic [WGT_W-1:0] p2;     // p^2
  } lane_t;

  lane_t     st    [NS+1][LANES];
  logic      vld   [NS+1];
  wgt_mode_e md    [NS+1];

  // stage 0: powers of p
  always_ff @(posedge clk) begin
    if (rst) begin
      vld[0] <= 1'b0;
    end else if (en) begin
      vld[0] <= in_valid;
    end
  end
  always_ff @(posedge clk) begin
    if (en) begin
      md[0] <= mode;
      for (int l = 0; l < LANES; l++) begin
        st[0][l].rad  <= RAD_W'(in_pix[l]) * RAD_W'(in_pix[l]) * RAD_W'(in_pix[l]);
        st[0][l].rem  <= '0;
        st[0][l].root <= '0;
        st[0][l].p    <= WGT_W'(in_pix[l]);
        st[0][l].p2   <= WGT_W'(in_pix[l]) * WGT_W'(in_pix[l]);
      end
    end
  end

  // stages 1..NS: one root bit each
  for (genvar s = 1; s <= NS; s++) begin : g_sqrt
    always_ff @(posedge clk) begin
      if (rst) vld[s] <= 1'b0;
      else if (en) vld[s] <= vld[s-1];
    end
    always_ff @(posedge clk) begin
      if (en) begin
        md[s] <= md[s-1];
        for (int l = 0; l < LANES; l++) begin
          logic [REM_W-1:0] r;
          logic [REM_W-1:0] trial;
          r     = {st[s-1][l].rem[REM_W-3:0], st[s-1][l].rad[RAD_W-1 -: 2]};
          trial = {st[s-1][l].root, 2'b01};
          st[s][l].rad <= st[s-1][l].rad << 2;
          st[s][l].p   <= st[s-1][l].p;
          st[s][l].p2  <= st[s-1][l].p2;
          if (r >= trial) begin
            st[s][l].rem  <= r - trial;
            st[s][l].root <= {st[s-1][l].root[RT_W-2:0], 1'b1};
          end else begin
            st[s][l].rem  <= r;
            st[s][l].root <= {st[s-1][l].root[RT_W-2:0], 1'b0};
          end
        end
      end
    end
  end

  // output select
  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else if (en) out_valid <= vld[NS];
  end
  always_ff @(posedge clk) begin
    if (en) begin
      for (int l = 0; l < LANES; l++) begin
        unique case (md[NS])
          WGT_P1_5: out_w[l] <= WGT_W'(st[NS][l].root);
          WGT_P2:   out_w[l] <= st[NS][l].p2;
          default:  out_w[l] <= st[NS][l].p;
        endcase
      end
    end
  end

  always_comb begin
    busy = out_valid;
    for (int s = 0; s <= NS; s++) busy |= vld[s];
  end
endmodule
