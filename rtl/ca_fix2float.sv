// ca_fix2float: conversion of the divider's fixed-point mean position to
// IEEE-754 single precision.
//
// Input is the unsigned fixed-point quotient quo (INT_W integer, FRAC_W
// fraction bits) with its sticky bit (non-zero remainder), and a flag for an
// all-zero sub-aperture. Following the paper, the division result is turned
// into a floating-point number first; the centre offset is subtracted
// afterwards, in floating point, by ca_fp_offset.
//
// Rounding is to nearest, ties to even (this design's choice). When the
// value has more than 24 significant fixed-point bits the sticky bit takes
// part in the rounding, so the result is the correctly rounded true
// quotient. A value with 24 or fewer significant bits (below 2^(24-FRAC_W))
// is converted exactly from its truncated fixed-point form. An all-zero
// sub-aperture gives the quiet NaN 0x7FC00000, as 0/0 does in C.
//
// The input is unsigned, so the sign bit of fp is always 0.
//
// Two pipeline stages (leading-one detection; shift and round), both
// advancing on en; latency 2 clocks, one result per clock.
module ca_fix2float
  import ca_pkg::*;
#(
  parameter int unsigned INT_W  = 5,
  parameter int unsigned FRAC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic                    in_valid,
  input  logic [INT_W+FRAC_W-1:0] quo,
  input  logic                    sticky,
  input  logic                    zero_den,
  output logic                    out_valid,
  output logic [FP_W-1:0]         fp,
  output logic                    busy
);
  localparam int unsigned QW = INT_W + FRAC_W;
  localparam int unsigned PW = $clog2(QW);

  // ---- stage A: find the leading one
  logic          a_valid, a_sticky, a_nan, a_zero;
  logic [QW-1:0] a_mag;
  logic [PW-1:0] a_lead;
  logic [PW-1:0] lead;
  always_comb begin
    lead = '0;
    for (int i = 0; i < QW; i++) if (quo[i]) lead = PW'(i);
  end

  always_ff @(posedge clk) begin
    if (rst) a_valid <= 1'b0;
    else if (en) a_valid <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (en) begin
      a_nan    <= zero_den;
      a_sticky <= sticky;
      a_mag    <= quo;
      a_lead   <= lead;
      a_zero   <= (quo == '0);
    end
  end

  // ---- stage B: normalise and round
  logic [QW-1:0] shifted;
  logic [8:0]    expo;
  logic          guard, rest, rnd;
  logic [24:0]   mant_r;

  always_comb begin
    expo    = 9'(a_lead) + 9'd127 - 9'(FRAC_W);
    guard   = 1'b0;
    rest    = 1'b0;
    if (a_lead > PW'(23)) begin
      shifted = a_mag >> (a_lead - PW'(23));
      guard   = a_mag[a_lead - PW'(24)];
      for (int i = 0; i < QW; i++)
        if (i < int'(a_lead) - 24 && a_mag[i]) rest = 1'b1;
      rest |= a_sticky;
    end else begin
      shifted = a_mag << (PW'(23) - a_lead);
    end
    rnd    = guard && (rest || shifted[0]);
    mant_r = {1'b0, shifted[23:0]} + 25'(rnd);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      expo   = expo + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else if (en) out_valid <= a_valid;
  end
  always_ff @(posedge clk) begin
    if (en) begin
      if (a_nan)       fp <= FP_QNAN;
      else if (a_zero) fp <= '0;
      else             fp <= {1'b0, expo[7:0], mant_r[22:0]};
    end
  end

  assign busy = a_valid || out_valid;
endmodule
