`timescale 1ns/1ps
// bnn_pkg: sizes, types and helper functions shared by the BNN compute-in-memory
// tile. The tile holds 64 rows of 8 weight words. Each weight word pairs an 8-bit
// mean mu, stored differentially (two cells per bit), with a 4-bit standard
// deviation sigma that is multiplied by a Gaussian sample eps drawn by the GRNG
// inside the word. Inputs are 4-bit, and every word bit column has its own 6-bit
// SAR ADC. These sizes are the fabricated prototype's. The 16-bit output word,
// the encodings below and the x-source modes are this design's own choices.
package bnn_pkg;

  localparam int unsigned ROWS     = 64;  // rows per tile
  localparam int unsigned WORDS    = 8;   // words per row (outputs per MVM)
  localparam int unsigned X_BITS   = 4;   // input precision
  localparam int unsigned MU_BITS  = 8;   // mu magnitude bits, one differential pair each
  localparam int unsigned SIG_BITS = 4;   // sigma bits, one cell each
  localparam int unsigned ADC_BITS = 6;   // SAR ADC resolution
  localparam int unsigned Y_W      = 16;  // width of a reconstructed output word
  localparam int unsigned MU_W     = MU_BITS + 1; // signed mu on the host side: -255..255

  localparam int unsigned ROW_AW   = $clog2(ROWS);
  localparam int unsigned WORD_AW  = $clog2(WORDS);

  // One mu word as stored: bit b is the cell pair (n[b], p[b]). A pair 0 1 adds
  // +2^b to the weight, 1 0 adds -2^b, 0 0 adds nothing.
  typedef struct packed {
    logic [MU_BITS-1:0] n;
    logic [MU_BITS-1:0] p;
  } mu_cells_t;

  typedef logic [SIG_BITS-1:0] sigma_t;
  typedef logic [X_BITS-1:0]   x_t;
  typedef logic signed [ADC_BITS-1:0] adc_code_t;  // two's complement, -32..31
  typedef logic signed [Y_W-1:0]      y_t;

  // Where the IDACs take their input from.
  typedef enum logic [1:0] {
    XSRC_BUFFER = 2'd0,  // the input vector written by the host
    XSRC_ZERO   = 2'd1,  // all inputs 0: ADC offset measurement
    XSRC_ONEHOT = 2'd2   // input 1 on one row, 0 elsewhere: GRNG offset measurement
  } xsrc_e;

  // Sign-magnitude encoding of a signed mu (saturated to +-255) into cell pairs.
  function automatic mu_cells_t mu_encode(input logic signed [MU_W-1:0] v);
    mu_cells_t c;
    logic [MU_W-1:0] mag;
    mag = v[MU_W-1] ? MU_W'(-v) : MU_W'(v);
    if (mag > MU_W'(255)) mag = MU_W'(255);
    c.p = v[MU_W-1] ? '0 : mag[MU_BITS-1:0];
    c.n = v[MU_W-1] ? mag[MU_BITS-1:0] : '0;
    return c;
  endfunction

  // Weight value a stored mu word contributes: sum over b of 2^b (p_b - n_b).
  function automatic int mu_value(input mu_cells_t c);
    return int'(c.p) - int'(c.n);
  endfunction

endpackage
