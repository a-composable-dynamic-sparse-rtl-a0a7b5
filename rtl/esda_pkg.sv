// esda_pkg: types and helpers shared by every dataflow module.
//
// Every module in the accelerator talks through the same sparse token-feature
// interface: a token {x, y, end_flag} naming the spatial location of one
// feature vector, streamed in raster order (ravel = y*W + x strictly
// increasing). A token with end_flag set closes a frame and carries no
// feature. This package holds the token type, the kernel-offset beat used
// between a sparse line buffer and its computation module, the 8-bit
// requantisation step and the formula that fills the static weight ROMs.
//
// Paper: token fields [.x, .y, .end], raster order, 8-bit weights and
// activations. Own choices: 12-bit coordinates, a separate end token, and the
// requantisation (bias, arithmetic shift, optional ReLU, saturation).
package esda_pkg;

  localparam int unsigned COORD_W = 12;   // up to 4096 pixels per axis
  localparam int unsigned DW      = 8;    // activation / weight width
  localparam int unsigned ACC_W   = 32;   // accumulator width
  localparam int unsigned OFF_W   = 6;    // kernel offset index, k*k <= 64

  typedef logic signed [DW-1:0]    act_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  typedef struct packed {
    logic               end_flag;  // end of stream, no feature attached
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
  } token_t;

  // One element of the kernel offset stream: which position of the k*k
  // window the accompanying feature sits at, and whether it is the last
  // non-zero neighbour of the current output token.
  typedef struct packed {
    logic [OFF_W-1:0] off;
    logic             last;
  } koff_t;

  // Raster comparison: a strictly after b.
  function automatic logic ravel_gt(input logic [COORD_W-1:0] ax, input logic [COORD_W-1:0] ay,
                                    input logic [COORD_W-1:0] bx, input logic [COORD_W-1:0] by);
    return (ay > by) || ((ay == by) && (ax > bx));
  endfunction

  // Deterministic stand-in for trained weights: a multiplicative hash of the
  // layer seed and the flat weight index, mapped to [-64, 63].
  function automatic act_t wgen(input int unsigned seed, input int unsigned idx);
    int unsigned h;
    h = (idx + 32'd1) * 32'h9E3779B1 ^ (seed * 32'h85EBCA77);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 13);
    return act_t'(int'(h[6:0]) - 64);
  endfunction

  // Bias of a folded batch-norm, in [-256, 255].
  function automatic acc_t bgen(input int unsigned seed, input int unsigned idx);
    int unsigned h;
    h = (idx + 32'd7) * 32'hC2B2AE35 ^ (seed * 32'h27D4EB2F);
    h = h ^ (h >> 16);
    h = h * 32'h165667B1;
    h = h ^ (h >> 11);
    return acc_t'(int'(h[8:0]) - 256);
  endfunction

  // Requantise an accumulator to an 8-bit activation.
  function automatic act_t requant(input acc_t acc, input int unsigned shift, input logic relu);
    acc_t s;
    s = acc >>> shift;
    if (relu && s < 0) return '0;
    if (s > 127)       return act_t'(127);
    if (s < -128)      return act_t'(-128);
    return act_t'(s);
  endfunction

  // Saturating 8-bit add used by the residual merge.
  function automatic act_t sat_add(input act_t a, input act_t b);
    logic signed [DW:0] s;
    s = {a[DW-1], a} + {b[DW-1], b};
    if (s > 127)  return act_t'(127);
    if (s < -128) return act_t'(-128);
    return act_t'(s);
  endfunction

endpackage
