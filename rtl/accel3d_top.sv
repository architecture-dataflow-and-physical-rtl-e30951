// accel3d_top: a 3D-stacked systolic GEMM accelerator running the
// distributed output-stationary (dOS) dataflow.
//
// L tiers, each an R x C output-stationary systolic array, are stacked and
// every MAC is linked to the MAC below it. For C = A * B each tier computes
// the partial product over its own slice of the inner dimension K, then the
// piles of stacked MACs sum their partial results down to the bottom tier,
// which drains the finished outputs into the output scratchpad. Defaults are
// the configuration whose power and thermal behaviour was analysed: 3 tiers
// of 128 x 128 MACs (16384 per tier), 8-bit operands, 16-bit results.
//
// Blocks: per tier an A scratchpad (R operands per word), a B scratchpad
// (C operands per word) and a tier_feeder; one dos_array3d; one output
// scratchpad (C results per word) on the bottom tier; one dos_controller.
//
// Host side (stands in for the memory controller, which is not part of
// this design): before start, write tier t's A scratchpad word
// mf*KT + s with A(mf*R + r, t*KT + s) in lane r, and tier t's B scratchpad
// word nf*KT + s with B(t*KT + s, nf*C + c) in lane c, where KT = ceil(K/L),
// zero where an index lies outside the matrix. After done, word
// (mf*ceil(N/C) + nf)*R + r of the output scratchpad holds
// C(mf*R + r, nf*C + c) in lane c; reads return data one cycle after o_re.
// Timing: done rises ceil(M/R)*ceil(N/C)*P + 2 cycles after start, with P
// the fold period given in dos_controller.
module accel3d_top
  import dos_pkg::*;
#(
  parameter int unsigned L       = 3,
  parameter int unsigned R       = 128,
  parameter int unsigned C       = 128,
  parameter int unsigned A_DEPTH = 2048,
  parameter int unsigned B_DEPTH = 2048,
  parameter int unsigned O_DEPTH = 1024,
  parameter int unsigned DW      = 16,
  localparam int unsigned AW_A   = (A_DEPTH > 1) ? $clog2(A_DEPTH) : 1,
  localparam int unsigned AW_B   = (B_DEPTH > 1) ? $clog2(B_DEPTH) : 1,
  localparam int unsigned AW_O   = (O_DEPTH > 1) ? $clog2(O_DEPTH) : 1,
  localparam int unsigned TW     = (L > 1) ? $clog2(L) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host write port of the A scratchpads
  input  logic                 a_we,
  input  logic [TW-1:0]        a_tier,
  input  logic [AW_A-1:0]      a_waddr,
  input  data_t [R-1:0]        a_wdata,
  // host write port of the B scratchpads
  input  logic                 b_we,
  input  logic [TW-1:0]        b_tier,
  input  logic [AW_B-1:0]      b_waddr,
  input  data_t [C-1:0]        b_wdata,
  // host read port of the output scratchpad
  input  logic                 o_re,
  input  logic [AW_O-1:0]      o_raddr,
  output acc_t  [C-1:0]        o_rdata,
  // GEMM command
  input  logic                 start,
  input  logic [DW-1:0]        m,
  input  logic [DW-1:0]        n,
  input  logic [DW-1:0]        k,
  output logic                 busy,
  output logic                 done,
  output logic                 err
);

  logic            fold_start, drain, o_we;
  logic [AW_A-1:0] a_base;
  logic [AW_B-1:0] b_base;
  logic [AW_O-1:0] o_waddr;
  logic [DW-1:0]   kt;

  dos_controller #(
    .L(L), .R(R), .C(C), .A_DEPTH(A_DEPTH), .B_DEPTH(B_DEPTH),
    .O_DEPTH(O_DEPTH), .DW(DW)
  ) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .m(m), .n(n), .k(k),
    .busy(busy), .done(done), .err(err),
    .fold_start(fold_start), .a_base(a_base), .b_base(b_base), .kt(kt),
    .drain(drain), .o_we(o_we), .o_waddr(o_waddr)
  );

  data_t west_a   [L][R];
  tok_t  west_tok [L][R];
  data_t north_b  [L][C];

  for (genvar t = 0; t < L; t++) begin : g_tier
    logic            a_re, b_re;
    logic [AW_A-1:0] a_raddr;
    logic [AW_B-1:0] b_raddr;
    data_t [R-1:0]   a_rdata;
    data_t [C-1:0]   b_rdata;

    scratchpad_sram #(.WIDTH(R * DATA_W), .DEPTH(A_DEPTH)) u_sram_a (
      .clk(clk), .rst_n(rst_n),
      .we(a_we && (32'(a_tier) == t)), .waddr(a_waddr), .wdata(a_wdata),
      .re(a_re), .raddr(a_raddr), .rdata(a_rdata)
    );
    scratchpad_sram #(.WIDTH(C * DATA_W), .DEPTH(B_DEPTH)) u_sram_b (
      .clk(clk), .rst_n(rst_n),
      .we(b_we && (32'(b_tier) == t)), .waddr(b_waddr), .wdata(b_wdata),
      .re(b_re), .raddr(b_raddr), .rdata(b_rdata)
    );
    tier_feeder #(
      .TIER(t), .R(R), .C(C), .AW_A(AW_A), .AW_B(AW_B), .KW(DW)
    ) u_feeder (
      .clk(clk), .rst_n(rst_n),
      .fold_start(fold_start), .a_base(a_base), .b_base(b_base), .kt(kt),
      .a_re(a_re), .a_raddr(a_raddr), .a_rdata(a_rdata),
      .b_re(b_re), .b_raddr(b_raddr), .b_rdata(b_rdata),
      .west_a(west_a[t]), .west_tok(west_tok[t]), .north_b(north_b[t])
    );
  end

  acc_t         south_out [C];
  acc_t [C-1:0] south_word;
  for (genvar c = 0; c < C; c++) begin : g_south
    assign south_word[c] = south_out[c];
  end

  dos_array3d #(.L(L), .R(R), .C(C)) u_array (
    .clk(clk), .rst_n(rst_n),
    .west_a(west_a), .west_tok(west_tok), .north_b(north_b),
    .drain(drain), .south_out(south_out)
  );

  scratchpad_sram #(.WIDTH(C * ACC_W), .DEPTH(O_DEPTH)) u_sram_o (
    .clk(clk), .rst_n(rst_n),
    .we(o_we), .waddr(o_waddr), .wdata(south_word),
    .re(o_re), .raddr(o_raddr), .rdata(o_rdata)
  );

  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !(a_we || b_we))
    else $error("accel3d_top: scratchpad written while a GEMM runs");

endmodule
