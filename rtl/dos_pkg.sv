// dos_pkg: types shared by the 3D distributed-output-stationary (dOS) array.
//
// Operands are 8-bit and results 16-bit, the widths of the synthesized
// array; signed two's-complement arithmetic is this design's choice. The
// accumulator wraps modulo 2^16 when a dot product exceeds its range.
//
// A control token travels alongside every west-edge operand, one register
// stage per MAC, so each MAC learns locally when to start, when to
// accumulate and when to add the partial sum of the tier above:
//   valid : the operands at this MAC form a product to accumulate
//   first : first product of a fold; it replaces the old accumulator
//   vadd  : add the partial sum arriving over the vertical link
package dos_pkg;

  localparam int unsigned DATA_W = 8;
  localparam int unsigned ACC_W  = 16;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef struct packed {
    logic valid;
    logic first;
    logic vadd;
  } tok_t;

  localparam tok_t TOK_IDLE = '{valid: 1'b0, first: 1'b0, vadd: 1'b0};

endpackage
