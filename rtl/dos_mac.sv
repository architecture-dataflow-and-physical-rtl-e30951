// dos_mac: one MAC of the 3D systolic array (distributed output stationary).
//
// The MAC keeps its output in place (output stationary). Each cycle it
// registers the west operand and its control token and forwards them east,
// and registers the north operand and forwards it south, so operands move
// one MAC per cycle. The accumulator is updated by exactly one adder whose
// second operand comes from a two-way MUX:
//   tok.valid : acc <= (first ? 0 : acc) + a*b        (in-place reduction)
//   tok.vadd  : acc <= acc + psum_up                   (cross-tier reduction)
//   drain     : acc <= acc_north                       (shift result south)
// The MUX, the vadd control and the vertical psum link are the additions
// to a 2D output-stationary MAC that the 3D array needs; the token encoding
// and the in-column drain shift are choices of this design.
//
// Interface: psum_up is the accumulator of the MAC directly above in the
// next tier (0 for the top tier); acc is registered and feeds both the MAC
// below in the next tier and, during drain, the MAC south in the same tier.
// Timing: every output is a register; one cycle from input to output.
module dos_mac
  import dos_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  data_t a_in,
  input  tok_t  tok_in,
  input  data_t b_in,
  input  acc_t  psum_up,
  input  acc_t  acc_north,
  input  logic  drain,
  output data_t a_out,
  output tok_t  tok_out,
  output data_t b_out,
  output acc_t  acc
);

  acc_t prod;
  acc_t addend;
  acc_t base;

  always_comb begin
    prod   = acc_t'(a_in) * acc_t'(b_in);
    addend = tok_in.vadd ? psum_up : prod;  // the MUX added for 3D
    base   = (tok_in.valid && tok_in.first) ? '0 : acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out   <= '0;
      b_out   <= '0;
      tok_out <= TOK_IDLE;
      acc     <= '0;
    end else begin
      a_out   <= a_in;
      b_out   <= b_in;
      tok_out <= tok_in;
      if (drain)
        acc <= acc_north;
      else if (tok_in.valid || tok_in.vadd)
        acc <= base + addend;
    end
  end

  // A token never asks for both a product and a vertical add, and the
  // drain never overlaps accumulation in the same MAC.
  assert property (@(posedge clk) disable iff (!rst_n) !(tok_in.valid && tok_in.vadd))
    else $error("dos_mac: valid and vadd in the same token");
  assert property (@(posedge clk) disable iff (!rst_n) !(drain && (tok_in.valid || tok_in.vadd)))
    else $error("dos_mac: drain during accumulation");

endmodule
