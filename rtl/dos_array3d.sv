// dos_array3d: the 3D systolic array, L identical tiers of R x C MACs.
//
// Every MAC is linked to the MAC directly below it in the next tier (one
// TSV/MIV link per MAC pair, as in the worst-case provisioning the design
// assumes). Under the distributed output-stationary dataflow each tier
// accumulates a slice of the inner dimension K in place; then each pile of
// stacked MACs adds its partial sums from the top tier (tier 0) downwards,
// one tier per cycle, and the bottom tier (tier L-1) holds the result.
// Only the bottom tier drains: its south edge is the output of the array.
//
// Interface: west/north edge operands per tier (already skewed, see
// tier_feeder); drain shifts the bottom tier; south_out is the bottom row of
// the bottom tier. Timing: the vertical link is the registered accumulator
// of the tier above, so a pile's reduction takes one cycle per tier.
module dos_array3d
  import dos_pkg::*;
#(
  parameter int unsigned L = 3,
  parameter int unsigned R = 128,
  parameter int unsigned C = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  data_t west_a    [L][R],
  input  tok_t  west_tok  [L][R],
  input  data_t north_b   [L][C],
  input  logic  drain,
  output acc_t  south_out [C]
);

  // acc_t3[t] is the accumulator plane of tier t; the vertical links carry
  // tier t's plane into tier t+1 as psum_up.
  acc_t acc_t3  [L][R][C];
  acc_t south_t [L][C];

  for (genvar t = 0; t < L; t++) begin : g_tier
    acc_t psum_in [R][C];
    if (t == 0) begin : g_top
      assign psum_in = '{default: '0};
    end else begin : g_below
      assign psum_in = acc_t3[t-1];
    end
    dos_tier #(.R(R), .C(C)) u_tier (
      .clk       (clk),
      .rst_n     (rst_n),
      .west_a    (west_a[t]),
      .west_tok  (west_tok[t]),
      .north_b   (north_b[t]),
      .psum_up   (psum_in),
      .drain     ((t == L - 1) ? drain : 1'b0),
      .acc       (acc_t3[t]),
      .south_out (south_t[t])
    );
  end

  assign south_out = south_t[L-1];

endmodule
