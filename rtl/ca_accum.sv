// ca_accum: centroid accumulator. Follows the pixel position inside the
// current sub-aperture and forms, over all of its pixels,
//   sum_w  = sum(w),  sum_xw = sum(x * w),  sum_yw = sum(y * w)
// with x in 0..Nx-1 and y in 0..Ny-1, as the paper's centroid definition
// requires. When the last pixel of a sub-aperture arrives, the three sums
// are emitted (out_valid for one advancing cycle) and accumulation restarts.
//
// Four pixels arrive per word. Each lane's (x, y) is derived from the
// position of lane 0 by stepping along the row and wrapping to the next row
// and the next sub-aperture. A sub-aperture may end inside a word: the
// lanes up to and including its last pixel close the running sums and the
// lanes after it open the next one. With Nx, Ny >= 2 (at least 4 pixels)
// at most one sub-aperture ends per word, so one result per cycle suffices
// and the sustained rate is one word per clock for every sub-aperture size.
//
// Memory layout (this design's choice): sub-apertures are stored one after
// the other, each row-major with x varying fastest, pixel 0 in bits [15:0]
// of a word. clear (the run start) zeroes the sums and the position; a
// partly filled sub-aperture at the end of a run is never emitted.
// Latency: 1 clock from the word holding the last pixel to out_valid.
module ca_accum
  import ca_pkg::*;
#(
  parameter int unsigned MAX_N = 32
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  en,
  input  logic                  clear,
  input  logic [NSZ_W-1:0]      nx,
  input  logic [NSZ_W-1:0]      ny,
  input  logic                  in_valid,
  input  logic [LANES-1:0][WGT_W-1:0] in_w,
  output logic                  out_valid,
  output logic [WGT_W+2*$clog2(MAX_N)-1:0] sum_w,
  output logic [WGT_W+3*$clog2(MAX_N)-1:0] sum_xw,
  output logic [WGT_W+3*$clog2(MAX_N)-1:0] sum_yw
);
  localparam int unsigned PW  = $clog2(MAX_N);          // position bits
  localparam int unsigned SW  = WGT_W + 2 * PW;          // sum of weights
  localparam int unsigned SXW = SW + PW;                 // weighted position sum

  logic [PW-1:0]  x0, y0;                 // position of lane 0
  logic [SW-1:0]  acc_w;
  logic [SXW-1:0] acc_x, acc_y;

  logic [PW-1:0]  lx [LANES+1];
  logic [PW-1:0]  ly [LANES+1];
  logic [LANES-1:0] last;
  logic [SW-1:0]  pre_w, post_w;
  logic [SXW-1:0] pre_x, post_x, pre_y, post_y;
  logic           any_last;

  wire [PW-1:0] xmax = PW'(nx - 1'b1);
  wire [PW-1:0] ymax = PW'(ny - 1'b1);

  always_comb begin
    lx[0]    = x0;
    ly[0]    = y0;
    pre_w    = '0;  pre_x  = '0;  pre_y  = '0;
    post_w   = '0;  post_x = '0;  post_y = '0;
    any_last = 1'b0;
    for (int i = 0; i < LANES; i++) begin
      last[i] = (lx[i] == xmax) && (ly[i] == ymax);
      if (lx[i] == xmax) begin
        lx[i+1] = '0;
        ly[i+1] = (ly[i] == ymax) ? '0 : ly[i] + 1'b1;
      end else begin
        lx[i+1] = lx[i] + 1'b1;
        ly[i+1] = ly[i];
      end
      // lanes after a sub-aperture end belong to the next sub-aperture
      if (any_last) begin
        post_w += SW'(in_w[i]);
        post_x += SXW'(in_w[i]) * SXW'(lx[i]);
        post_y += SXW'(in_w[i]) * SXW'(ly[i]);
      end else begin
        pre_w  += SW'(in_w[i]);
        pre_x  += SXW'(in_w[i]) * SXW'(lx[i]);
        pre_y  += SXW'(in_w[i]) * SXW'(ly[i]);
      end
      any_last |= last[i];
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      x0 <= '0; y0 <= '0;
      acc_w <= '0; acc_x <= '0; acc_y <= '0;
      out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid && any_last;
      if (in_valid) begin
        x0 <= lx[LANES];
        y0 <= ly[LANES];
        if (any_last) begin
          sum_w  <= acc_w + pre_w;
          sum_xw <= acc_x + pre_x;
          sum_yw <= acc_y + pre_y;
          acc_w  <= post_w;
          acc_x  <= post_x;
          acc_y  <= post_y;
        end else begin
          acc_w  <= acc_w + pre_w;
          acc_x  <= acc_x + pre_x;
          acc_y  <= acc_y + pre_y;
        end
      end
    end
  end

  a_min_size: assert property (@(posedge clk) disable iff (rst)
    in_valid |-> (nx >= 2 && ny >= 2 && nx <= NSZ_W'(MAX_N) && ny <= NSZ_W'(MAX_N)));
endmodule
