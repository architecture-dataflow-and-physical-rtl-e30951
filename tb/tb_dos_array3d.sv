// tb_dos_array3d: self-checking test of the 3D array under the dOS schedule.
//
// A 3-tier array of 4 x 5 MACs computes C = A * B with K = 3 * 6. The
// testbench plays the feeders: tier t receives the slice k = t*6 .. t*6+5,
// row r and column c skewed by r and c cycles and tier t by t cycles, with a
// vadd token one cycle after the last operand of tiers 1 and 2. The drain
// starts in the first cycle after the bottom-right MAC of the bottom tier
// has added its last partial sum, cycle L-1 + R-1 + C-1 + KT after the first
// operand; the R drained rows, bottom row first, must equal the product
// computed here. Two GEMMs run back to back to check that the first product
// of a fold clears the old accumulators.
module tb_dos_array3d;
  import dos_pkg::*;
  localparam int L = 3, R = 4, C = 5, KT = 6, K = L * KT;

  logic  clk = 1'b0, rst_n = 1'b0, drain;
  data_t west_a [L][R];
  tok_t  west_tok [L][R];
  data_t north_b [L][C];
  acc_t  south_out [C];

  int checks = 0, failures = 0;
  int am [R][K];
  int bm [K][C];

  dos_array3d #(.L(L), .R(R), .C(C)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Edge values for schedule cycle cyc (0 = first operand at tier 0, MAC (0,0)).
  task automatic drive(input int cyc);
    for (int t = 0; t < L; t++) begin
      for (int r = 0; r < R; r++) begin
        int s = cyc - t - r;
        west_a[t][r] = '0; west_tok[t][r] = TOK_IDLE;
        if (s >= 0 && s < KT) begin
          west_a[t][r]   = data_t'(am[r][t*KT+s]);
          west_tok[t][r] = '{valid: 1'b1, first: s == 0, vadd: 1'b0};
        end else if (s == KT && t > 0) begin
          west_tok[t][r] = '{valid: 1'b0, first: 1'b0, vadd: 1'b1};
        end
      end
      for (int c = 0; c < C; c++) begin
        int s = cyc - t - c;
        north_b[t][c] = (s >= 0 && s < KT) ? data_t'(bm[t*KT+s][c]) : '0;
      end
    end
  endtask

  task automatic run_gemm();
    int last;
    acc_t expv;
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) am[r][k] = $urandom_range(0, 255) - 128;
    for (int k = 0; k < K; k++) for (int c = 0; c < C; c++) bm[k][c] = $urandom_range(0, 255) - 128;
    last = (L - 1) + (R - 1) + (C - 1) + KT;  // bottom-right vertical add
    for (int cyc = 0; cyc <= last; cyc++) begin
      @(negedge clk);
      drain = 1'b0;
      drive(cyc);
    end
    // drain: first cycle after the last vertical add
    for (int i = 0; i < R; i++) begin
      @(negedge clk);
      drive(last + 1 + i);
      drain = 1'b1;
      for (int c = 0; c < C; c++) begin
        int sum = 0;
        for (int k = 0; k < K; k++) sum += am[R-1-i][k] * bm[k][c];
        expv = acc_t'(sum);
        checks++;
        if (south_out[c] !== expv) begin
          failures++;
          $display("FAIL C[%0d][%0d] got %0d exp %0d", R-1-i, c, south_out[c], expv);
        end
      end
    end
    @(negedge clk);
    drain = 1'b0;
  endtask

  initial begin
    drain = 1'b0;
    drive(-100);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run_gemm();
    run_gemm();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
