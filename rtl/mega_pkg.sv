// mega_pkg: constants and types shared by the MEGA accelerator blocks.
//
// The Adaptive-Package format stores mixed-precision, sparse node features as
// packages of 64, 128 or 192 bits. Each package starts with a 2-bit Mode
// (00 short, 01 medium, 10 long) and a 3-bit Bitwidth, followed by the
// non-zero values of successive nodes, all of that bitwidth, packed from the
// least significant bit upward. Mode/Bitwidth codes and the three lengths
// follow the paper; the bit order inside the word and the code 000 for 8-bit
// values are choices of this design.
package mega_pkg;

  // Adaptive-Package geometry.
  localparam int unsigned WORD_BITS   = 64;
  localparam int unsigned PKG_MAX     = 192;   // long package
  localparam int unsigned HDR_BITS    = 5;     // Mode (2) + Bitwidth (3)
  localparam int unsigned SHORT_BITS  = 64;
  localparam int unsigned MEDIUM_BITS = 128;
  localparam int unsigned LONG_BITS   = 192;

  typedef enum logic [1:0] {
    MODE_SHORT  = 2'b00,
    MODE_MEDIUM = 2'b01,
    MODE_LONG   = 2'b10
  } pkg_mode_e;

  // Weight and combined-feature (B) precision.
  localparam int unsigned W_BITS   = 4;
  localparam int unsigned B_BITS   = 4;
  localparam int unsigned PSUM_BITS = 16;   // aggregation partial sums
  localparam int unsigned ACC_W    = 24;    // combination accumulators
  localparam int unsigned EVAL_BITS = 8;    // edge value of A
  localparam int unsigned NID_W    = 16;    // node id width
  localparam int unsigned SCALE_W  = 16;

  // Length in bits of a package of the given mode.
  function automatic int unsigned mode_bits(input logic [1:0] mode);
    case (mode)
      MODE_SHORT:  return SHORT_BITS;
      MODE_MEDIUM: return MEDIUM_BITS;
      default:     return LONG_BITS;
    endcase
  endfunction

  // Length in 64-bit words of a package of the given mode.
  function automatic logic [1:0] mode_words(input logic [1:0] mode);
    case (mode)
      MODE_SHORT:  return 2'd1;
      MODE_MEDIUM: return 2'd2;
      default:     return 2'd3;
    endcase
  endfunction

  // Bitwidth field <-> bitwidth (1..8); 8 is coded as 3'b000.
  function automatic logic [3:0] bw_decode(input logic [2:0] code);
    return (code == 3'd0) ? 4'd8 : {1'b0, code};
  endfunction

  function automatic logic [2:0] bw_encode(input logic [3:0] bits);
    return bits[2:0];
  endfunction

endpackage
