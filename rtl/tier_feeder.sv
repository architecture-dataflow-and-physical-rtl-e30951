// tier_feeder: streams one fold's operand slices from a tier's two
// scratchpads into the west and north edges of that tier.
//
// A fold of tier TIER uses KT consecutive words of each scratchpad: word
// a_base+s holds A(m, k) for the R rows of the fold, word b_base+s holds
// B(k, n) for the C columns, with k = TIER*KT + s (the host pads missing k
// with zeros). On fold_start the feeder waits TIER cycles (one cycle of
// skew per tier, as in the per-tier feed offsets of the dOS schedule), then
// reads one word of each scratchpad per cycle for KT cycles. The words pass
// through a triangular delay: row r and column c are delayed r and c cycles,
// so a(r,k) and b(k,c) meet in MAC (r,c). Every west operand carries a
// token (valid, first on s = 0); one cycle after the last operand a tier
// other than the top one sends a vadd token, which makes each MAC add the
// partial sum of the tier above as the token passes.
//
// Timing, relative to the fold_start cycle F: read of word s at F+TIER+s,
// operand at MAC (r,c) at F+1+TIER+r+c+s, vadd at MAC (r,c) at
// F+1+TIER+r+c+KT. kt must stay stable while a fold is in flight.
module tier_feeder
  import dos_pkg::*;
#(
  parameter int unsigned TIER = 0,
  parameter int unsigned R    = 128,
  parameter int unsigned C    = 128,
  parameter int unsigned AW_A = 10,
  parameter int unsigned AW_B = 10,
  parameter int unsigned KW   = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  fold_start,
  input  logic [AW_A-1:0]       a_base,
  input  logic [AW_B-1:0]       b_base,
  input  logic [KW-1:0]         kt,
  // scratchpad read ports
  output logic                  a_re,
  output logic [AW_A-1:0]       a_raddr,
  input  data_t [R-1:0]         a_rdata,
  output logic                  b_re,
  output logic [AW_B-1:0]       b_raddr,
  input  data_t [C-1:0]         b_rdata,
  // array edges
  output data_t                 west_a   [R],
  output tok_t                  west_tok [R],
  output data_t                 north_b  [C]
);

  // Per-tier start offset.
  logic start_d;
  skew_line #(.WIDTH(1), .DELAY(TIER)) u_tier_skew (
    .clk(clk), .rst_n(rst_n), .d(fold_start), .q(start_d)
  );

  logic            active;
  logic [KW-1:0]   s;
  logic [AW_A-1:0] a_ptr;
  logic [AW_B-1:0] b_ptr;
  logic            last_q;
  tok_t            tok_r;

  // The first read is issued in the cycle the (tier-delayed) start arrives.
  wire             rd        = start_d ? (kt != '0) : active;
  wire [KW-1:0]    s_cur     = start_d ? '0 : s;
  wire [AW_A-1:0]  a_cur     = start_d ? a_base : a_ptr;
  wire [AW_B-1:0]  b_cur     = start_d ? b_base : b_ptr;
  wire             last_read = rd && (s_cur == kt - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      s      <= '0;
      a_ptr  <= '0;
      b_ptr  <= '0;
      last_q <= 1'b0;
      tok_r  <= TOK_IDLE;
    end else begin
      last_q <= last_read;
      tok_r  <= '{valid: rd, first: rd && (s_cur == '0),
                  vadd: last_q && (TIER != 0)};
      if (rd) begin
        active <= !last_read;
        s      <= s_cur + 1'b1;
        a_ptr  <= a_cur + 1'b1;
        b_ptr  <= b_cur + 1'b1;
      end
    end
  end

  assign a_re    = rd;
  assign a_raddr = a_cur;
  assign b_re    = rd;
  assign b_raddr = b_cur;

  // Edge words, zero while idle, then the diagonal skew.
  data_t [R-1:0] a_word;
  data_t [C-1:0] b_word;
  assign a_word = tok_r.valid ? a_rdata : '0;
  assign b_word = tok_r.valid ? b_rdata : '0;

  localparam int unsigned LW = $bits(data_t) + $bits(tok_t);

  for (genvar r = 0; r < R; r++) begin : g_row
    logic [LW-1:0] lane_q;
    skew_line #(.WIDTH(LW), .DELAY(r)) u_skew (
      .clk(clk), .rst_n(rst_n), .d({a_word[r], tok_r}), .q(lane_q)
    );
    assign {west_a[r], west_tok[r]} = lane_q;
  end

  for (genvar c = 0; c < C; c++) begin : g_col
    skew_line #(.WIDTH($bits(data_t)), .DELAY(c)) u_skew (
      .clk(clk), .rst_n(rst_n), .d(b_word[c]), .q(north_b[c])
    );
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(start_d && active))
    else $error("tier_feeder: fold started while the previous one is still read");

endmodule
