// ca_fp_offset: subtracts the sub-aperture centre offset (N-1)/2 from a
// single-precision centroid, so that 0 is the centre and results lie in
// -(N-1)/2 .. +(N-1)/2, as the paper specifies; the paper applies this
// offset last, after the conversion to floating point.
//
// The result is the IEEE-754 difference a - (N-1)/2, rounded to nearest,
// ties to even. Because a comes from ca_fix2float it is either NaN, zero or
// a positive number between 2^-FRAC_W and 2^INT_W, so it is placed exactly
// into a fixed-point word with FRAC_W+23 fraction bits; the offset, a
// multiple of 1/2, is subtracted there without error and the difference is
// normalised and rounded once. This equals a general floating-point
// subtraction for these operands and needs no alignment shifter for the
// second operand. An exact zero gives +0.0; NaN passes through unchanged.
//
// Two pipeline stages (unpack and subtract; normalise and round), both
// advancing on en; latency 2 clocks, one result per clock.
module ca_fp_offset
  import ca_pkg::*;
#(
  parameter int unsigned INT_W  = 5,
  parameter int unsigned FRAC_W = 32
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              en,
  input  logic              in_valid,
  input  logic [FP_W-1:0]   a,
  input  logic [NSZ_W-1:0]  nm1,
  output logic              out_valid,
  output logic [FP_W-1:0]   fp,
  output logic              busy
);
  localparam int unsigned L  = FRAC_W + 23;      // fraction bits of the exact form
  localparam int unsigned W  = INT_W + L;        // magnitude width
  localparam int unsigned PW = $clog2(W);

  // ---- stage A: exact fixed-point form of a, minus the offset
  logic [7:0]   ea;
  logic [23:0]  ma;
  logic [W-1:0] fa;
  logic [W:0]   d;
  always_comb begin
    ea = a[30:23];
    ma = {1'b1, a[22:0]};
    // weight of the mantissa LSB is 2^(ea-127-23) = 2^-L * 2^(ea-127+FRAC_W)
    if (ea == 8'd0) fa = '0;
    else            fa = W'(ma) << (int'(ea) - 127 + int'(FRAC_W));
    d = {1'b0, fa} - ((W+1)'(nm1) << (L - 1));
  end

  logic         a_valid, a_nan, a_neg;
  logic [W-1:0] a_mag;
  always_ff @(posedge clk) begin
    if (rst) a_valid <= 1'b0;
    else if (en) a_valid <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (en) begin
      a_nan <= (a[30:23] == 8'hFF);
      a_neg <= d[W];
      a_mag <= d[W] ? W'(-d) : W'(d);
    end
  end

  // ---- stage B: normalise and round (the magnitude is exact, no sticky input)
  logic [PW-1:0] lead;
  logic [W-1:0]  shifted;
  logic [8:0]    expo;
  logic          guard, rest, rnd;
  logic [24:0]   mant_r;
  always_comb begin
    lead = '0;
    for (int i = 0; i < W; i++) if (a_mag[i]) lead = PW'(i);
    expo  = 9'(lead) + 9'd127 - 9'(L);
    guard = 1'b0;
    rest  = 1'b0;
    if (lead > PW'(23)) begin
      shifted = a_mag >> (lead - PW'(23));
      guard   = a_mag[lead - PW'(24)];
      for (int i = 0; i < W; i++)
        if (i < int'(lead) - 24 && a_mag[i]) rest = 1'b1;
    end else begin
      shifted = a_mag << (PW'(23) - lead);
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
      if (a_nan)              fp <= FP_QNAN;
      else if (a_mag == '0)   fp <= '0;
      else                    fp <= {a_neg, expo[7:0], mant_r[22:0]};
    end
  end

  assign busy = a_valid || out_valid;

  a_range: assert property (@(posedge clk) disable iff (rst)
    en && in_valid && a[30:23] != 8'hFF && a[30:23] != 8'd0 |->
      !a[31] && int'(a[30:23]) - 127 >= -int'(FRAC_W) && int'(a[30:23]) - 127 < int'(INT_W));
endmodule
