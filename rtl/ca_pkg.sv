// ca_pkg: shared constants and types of the centroid accelerator.
//
// The accelerator reads 16-bit sub-aperture pixels from host memory eight
// bytes (four pixels) per clock, computes the photon-weighted mean x and y
// position of every sub-aperture, and writes the two positions back to host
// memory as IEEE-754 single-precision numbers. The widths below follow from
// the 16-bit pixel format, the 8-byte-per-cycle bus and the largest
// sub-aperture (32 x 32 pixels). The register map, the address width and the
// number of fraction bits are this design's own choices.
package ca_pkg;

  localparam int unsigned DATA_W  = 64;               // host bus word, 8 bytes
  localparam int unsigned PIX_W   = 16;               // unsigned CCD pixel
  localparam int unsigned LANES   = DATA_W / PIX_W;   // pixels per word
  localparam int unsigned WGT_W   = 32;               // weighted pixel (p^2 < 2^32)
  localparam int unsigned FP_W    = 32;               // IEEE single
  localparam int unsigned ADDR_W  = 40;               // host physical address
  localparam int unsigned NSZ_W   = 6;                // holds Nx, Ny up to 32

  // Pixel weighting modes.
  typedef enum logic [1:0] {
    WGT_NONE  = 2'd0,   // w = p
    WGT_P1_5  = 2'd1,   // w = floor(p^1.5)
    WGT_P2    = 2'd2    // w = p^2
  } wgt_mode_e;

  // Register indices (64-bit registers).
  typedef enum logic [3:0] {
    REG_RD_ADDR  = 4'd0,  // byte address of the first pixel word
    REG_RD_BYTES = 4'd1,  // number of bytes to read (multiple of 8)
    REG_WR_ADDR  = 4'd2,  // byte address for the first centroid pair
    REG_NX       = 4'd3,  // pixels per sub-aperture row, 2..MAX_N
    REG_NY       = 4'd4,  // pixel rows per sub-aperture, 2..MAX_N
    REG_WEIGHT   = 4'd5,  // wgt_mode_e
    REG_CTRL     = 4'd6,  // write 1: start, write 2: stop
    REG_STATUS   = 4'd7,  // bit0 busy, bit1 done
    REG_COUNT    = 4'd8   // centroid pairs written by the current run
  } reg_idx_e;

  // Run configuration, frozen while a run is active.
  typedef struct packed {
    logic [ADDR_W-1:0] rd_addr;
    logic [ADDR_W-1:0] rd_bytes;
    logic [ADDR_W-1:0] wr_addr;
    logic [NSZ_W-1:0]  nx;
    logic [NSZ_W-1:0]  ny;
    wgt_mode_e         mode;
  } cfg_t;

  localparam logic [FP_W-1:0] FP_QNAN = 32'h7FC0_0000;

endpackage
