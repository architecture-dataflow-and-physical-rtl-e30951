// tb_tier_feeder: self-checking test of tier_feeder for tier 2.
//
// A behavioural pair of scratchpads (one-cycle read latency, like
// scratchpad_sram) holds random words. After fold_start at cycle F the
// feeder must present, at west row r, operand A word (a_base+s) lane r with
// a valid token (first on s = 0) at cycle F+1+TIER+r+s, a vadd token at
// F+1+TIER+r+KT and nothing else; at north column c, B word (b_base+s) lane
// c at F+1+TIER+c+s and zero otherwise. Every edge value is checked in every
// cycle of two folds with different base addresses.
module tb_tier_feeder;
  import dos_pkg::*;
  localparam int TIER = 2, R = 3, C = 4, AW = 5, KT = 5;

  logic clk = 1'b0, rst_n = 1'b0, fold_start;
  logic [AW-1:0] a_base, b_base, a_raddr, b_raddr;
  logic [15:0]   kt;
  logic          a_re, b_re;
  data_t [R-1:0] a_rdata;
  data_t [C-1:0] b_rdata;
  data_t west_a [R];
  tok_t  west_tok [R];
  data_t north_b [C];

  data_t [R-1:0] amem [2**AW];
  data_t [C-1:0] bmem [2**AW];

  int checks = 0, failures = 0;

  tier_feeder #(.TIER(TIER), .R(R), .C(C), .AW_A(AW), .AW_B(AW), .KW(16)) dut (.*);

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (a_re) a_rdata <= amem[a_raddr];
    if (b_re) b_rdata <= bmem[b_raddr];
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run_fold(input int ab, input int bb);
    @(negedge clk);
    a_base = AW'(ab); b_base = AW'(bb); fold_start = 1'b1;
    @(negedge clk);
    fold_start = 1'b0;
    // now in cycle F+1
    for (int cyc = 1; cyc < 1 + TIER + KT + R + C + 2; cyc++) begin
      for (int r = 0; r < R; r++) begin
        int s;
        data_t ea;
        tok_t  et;
        s = cyc - 1 - TIER - r;
        ea = '0; et = TOK_IDLE;
        if (s >= 0 && s < KT) begin
          ea = amem[ab + s][r];
          et = '{valid: 1'b1, first: s == 0, vadd: 1'b0};
        end else if (s == KT) begin
          et = '{valid: 1'b0, first: 1'b0, vadd: TIER != 0};
        end
        check(west_a[r] === ea && west_tok[r] === et,
              $sformatf("west row %0d cycle F+%0d: a %0d/%0d tok %b/%b", r, cyc,
                        west_a[r], ea, west_tok[r], et));
      end
      for (int c = 0; c < C; c++) begin
        int s;
        data_t eb;
        s = cyc - 1 - TIER - c;
        eb = (s >= 0 && s < KT) ? bmem[bb + s][c] : '0;
        check(north_b[c] === eb, $sformatf("north col %0d cycle F+%0d", c, cyc));
      end
      @(negedge clk);
    end
  endtask

  initial begin
    for (int i = 0; i < 2**AW; i++) begin
      for (int r = 0; r < R; r++) amem[i][r] = data_t'($urandom);
      for (int c = 0; c < C; c++) bmem[i][c] = data_t'($urandom);
    end
    fold_start = 1'b0; a_base = '0; b_base = '0; kt = 16'(KT);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run_fold(3, 11);
    run_fold(20, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
