// dos_tier: one tier of the 3D array, an R x C output-stationary systolic
// array of dos_mac units linked to their direct neighbours by wires.
//
// Row r takes its A operand and control token at the west edge and passes
// them east; column c takes its B operand at the north edge and passes it
// south. The edge inputs must already carry the diagonal skew of an OS
// array (row r and column c delayed by r and c cycles), so that a(r,k) and
// b(k,c) meet in MAC (r,c). After the last operand, each MAC holds one
// output (or partial-sum) element; asserting drain shifts every column one
// row south per cycle and presents the bottom row at south_out, so R drain
// cycles empty the tier.
//
// Interface: psum_up[r][c] comes from the tier above over the vertical
// link; acc[r][c] goes to the tier below. Timing: one register per MAC
// hop; south_out is the registered bottom-row accumulator.
module dos_tier
  import dos_pkg::*;
#(
  parameter int unsigned R = 128,
  parameter int unsigned C = 128
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  data_t west_a    [R],
  input  tok_t  west_tok  [R],
  input  data_t north_b   [C],
  input  acc_t  psum_up   [R][C],
  input  logic  drain,
  output acc_t  acc       [R][C],
  output acc_t  south_out [C]
);

  // Horizontal links: a_h[r][c] and t_h[r][c] enter MAC (r,c) from the west.
  data_t a_h [R][C+1];
  tok_t  t_h [R][C+1];
  // Vertical (in-tier) links: b_v[r][c] enters MAC (r,c) from the north.
  data_t b_v [R+1][C];

  for (genvar r = 0; r < R; r++) begin : g_west
    assign a_h[r][0] = west_a[r];
    assign t_h[r][0] = west_tok[r];
  end
  for (genvar c = 0; c < C; c++) begin : g_north
    assign b_v[0][c] = north_b[c];
  end

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      acc_t acc_n;
      if (r == 0) begin : g_top
        assign acc_n = '0;
      end else begin : g_inner
        assign acc_n = acc[r-1][c];
      end
      dos_mac u_mac (
        .clk       (clk),
        .rst_n     (rst_n),
        .a_in      (a_h[r][c]),
        .tok_in    (t_h[r][c]),
        .b_in      (b_v[r][c]),
        .psum_up   (psum_up[r][c]),
        .acc_north (acc_n),
        .drain     (drain),
        .a_out     (a_h[r][c+1]),
        .tok_out   (t_h[r][c+1]),
        .b_out     (b_v[r+1][c]),
        .acc       (acc[r][c])
      );
    end
  end

  for (genvar c = 0; c < C; c++) begin : g_south
    assign south_out[c] = acc[R-1][c];
  end

endmodule
