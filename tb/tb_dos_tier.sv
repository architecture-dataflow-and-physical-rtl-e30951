// tb_dos_tier: self-checking test of one output-stationary tier.
//
// A 4 x 3 tier computes a 4 x 3 block of A * B over K = 7 with the diagonal
// edge skew, then receives one vadd token per row, which must add the
// psum_up plane (a random matrix standing for the tier above) to every
// accumulator. The accumulators are checked in place when MAC (R-1, C-1)
// has just finished (cycle R-1 + C-1 + K), then the tier is drained for R
// cycles and each south_out row is checked, bottom row first; after the
// drain the tier must hold zeros.
module tb_dos_tier;
  import dos_pkg::*;
  localparam int R = 4, C = 3, K = 7;

  logic  clk = 1'b0, rst_n = 1'b0, drain;
  data_t west_a [R];
  tok_t  west_tok [R];
  data_t north_b [C];
  acc_t  psum_up [R][C];
  acc_t  acc [R][C];
  acc_t  south_out [C];

  int checks = 0, failures = 0;
  int am [R][K];
  int bm [K][C];
  acc_t expm [R][C];

  dos_tier #(.R(R), .C(C)) dut (.*);

  always #5 clk = ~clk;

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

  task automatic drive(input int cyc);
    for (int r = 0; r < R; r++) begin
      int s = cyc - r;
      west_a[r] = '0; west_tok[r] = TOK_IDLE;
      if (s >= 0 && s < K) begin
        west_a[r] = data_t'(am[r][s]);
        west_tok[r] = '{valid: 1'b1, first: s == 0, vadd: 1'b0};
      end else if (s == K) begin
        west_tok[r] = '{valid: 1'b0, first: 1'b0, vadd: 1'b1};
      end
    end
    for (int c = 0; c < C; c++) begin
      int s = cyc - c;
      north_b[c] = (s >= 0 && s < K) ? data_t'(bm[s][c]) : '0;
    end
  endtask

  initial begin
    int last;
    drain = 1'b0;
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) am[r][k] = $urandom_range(0, 255) - 128;
    for (int k = 0; k < K; k++) for (int c = 0; c < C; c++) bm[k][c] = $urandom_range(0, 255) - 128;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      int sum;
      sum = 0;
      psum_up[r][c] = acc_t'($urandom);
      for (int k = 0; k < K; k++) sum += am[r][k] * bm[k][c];
      expm[r][c] = acc_t'(sum) + psum_up[r][c];
    end
    drive(-100);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    last = (R - 1) + (C - 1) + K;
    for (int cyc = 0; cyc <= last; cyc++) begin
      @(negedge clk);
      drive(cyc);
    end
    @(negedge clk);
    drive(last + 1);
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
      check(acc[r][c] === expm[r][c],
            $sformatf("acc[%0d][%0d] got %0d exp %0d", r, c, acc[r][c], expm[r][c]));
    drain = 1'b1;
    for (int i = 0; i < R; i++) begin
      for (int c = 0; c < C; c++)
        check(south_out[c] === expm[R-1-i][c], $sformatf("drain row %0d col %0d", R-1-i, c));
      @(negedge clk);
    end
    drain = 1'b0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
      check(acc[r][c] === '0, "empty after drain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
