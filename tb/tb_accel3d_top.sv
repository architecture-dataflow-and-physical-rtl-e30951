// tb_accel3d_top: end-to-end test of the 3D dOS accelerator at a small size
// (3 tiers of 4 x 4 MACs, 64-word scratchpads).
//
// For each GEMM the testbench generates random signed 8-bit A and B, loads
// the per-tier scratchpads through the host ports in the documented layout
// (K split over the tiers in slices of KT = ceil(K/3), zero padded), starts
// the accelerator, waits for done, checks the cycle count against
// folds * (2R + C + KT + L - 2) + 2, and reads back and checks every element
// of C = A * B (modulo 2^16). The GEMMs cover several M and N folds, partial
// folds at the edges, K not divisible by the tier count, K smaller than the
// tier count, and a workload too large for the scratchpads, which must be
// refused. The testbench counts how often each mechanism happened (folds,
// vertical adds, drain cycles, padded K slices, partial folds, refusals) and
// counts a failure for any that never did.
module tb_accel3d_top;
  import dos_pkg::*;
  localparam int L = 3, R = 4, C = 4, AD = 64, BD = 64, OD = 64, AW = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic a_we, b_we, o_re, start, busy, done, err;
  logic [1:0] a_tier, b_tier;
  logic [AW-1:0] a_waddr, b_waddr, o_raddr;
  data_t [R-1:0] a_wdata;
  data_t [C-1:0] b_wdata;
  acc_t  [C-1:0] o_rdata;
  logic [15:0] m, n, k;

  int checks = 0, failures = 0;
  int n_folds = 0, n_vadd = 0, n_drain = 0, n_pad = 0, n_partial = 0, n_refused = 0;

  accel3d_top #(.L(L), .R(R), .C(C), .A_DEPTH(AD), .B_DEPTH(BD), .O_DEPTH(OD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters, observed inside the design
  always_ff @(posedge clk) begin
    if (rst_n && dut.fold_start) n_folds++;
    if (rst_n && dut.drain) n_drain++;
    for (int t = 0; t < L; t++)
      for (int r = 0; r < R; r++)
        if (dut.west_tok[t][r].vadd) n_vadd++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic gemm(input int mm, input int nn, input int kk);
    int am [][], bm [][];
    int mf, nf, ktv, p, cyc, exp_cyc;
    am = new[mm]; foreach (am[i]) am[i] = new[kk];
    bm = new[kk]; foreach (bm[i]) bm[i] = new[nn];
    foreach (am[i, j]) am[i][j] = $urandom_range(0, 255) - 128;
    foreach (bm[i, j]) bm[i][j] = $urandom_range(0, 255) - 128;
    mf = (mm + R - 1) / R; nf = (nn + C - 1) / C; ktv = (kk + L - 1) / L;
    if (ktv * L != kk) n_pad++;
    if (mm % R != 0 || nn % C != 0) n_partial++;
    // load A: tier t, word f*KT+s, lane r = A(f*R+r, t*KT+s)
    for (int t = 0; t < L; t++) begin
      for (int f = 0; f < mf; f++) for (int s = 0; s < ktv; s++) begin
        @(negedge clk);
        a_we = 1'b1; a_tier = 2'(t); a_waddr = AW'(f * ktv + s);
        for (int r = 0; r < R; r++) begin
          int i, kx;
          i = f * R + r; kx = t * ktv + s;
          a_wdata[r] = (i < mm && kx < kk) ? data_t'(am[i][kx]) : '0;
        end
      end
      for (int f = 0; f < nf; f++) for (int s = 0; s < ktv; s++) begin
        @(negedge clk);
        a_we = 1'b0;
        b_we = 1'b1; b_tier = 2'(t); b_waddr = AW'(f * ktv + s);
        for (int c = 0; c < C; c++) begin
          int j, kx;
          j = f * C + c; kx = t * ktv + s;
          b_wdata[c] = (j < nn && kx < kk) ? data_t'(bm[kx][j]) : '0;
        end
      end
      @(negedge clk);
      a_we = 1'b0; b_we = 1'b0;
    end
    // run
    @(negedge clk);
    m = 16'(mm); n = 16'(nn); k = 16'(kk); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < 200000) begin
      @(negedge clk);
      cyc++;
    end
    check(!err, "GEMM accepted");
    p = 2*R + C + ktv - 2 + ((L > 1) ? L : 0);
    exp_cyc = mf * nf * p + 2;
    check(cyc == exp_cyc, $sformatf("M=%0d N=%0d K=%0d: %0d cycles, expected %0d",
                                    mm, nn, kk, cyc, exp_cyc));
    // read back
    for (int fm = 0; fm < mf; fm++) for (int fn = 0; fn < nf; fn++)
      for (int r = 0; r < R; r++) begin
        int i;
        i = fm * R + r;
        @(negedge clk);
        o_re = 1'b1; o_raddr = AW'((fm * nf + fn) * R + r);
        @(negedge clk);
        o_re = 1'b0;
        if (i < mm) for (int c = 0; c < C; c++) begin
          int j, sum;
          j = fn * C + c;
          if (j < nn) begin
            sum = 0;
            for (int x = 0; x < kk; x++) sum += am[i][x] * bm[x][j];
            check(o_rdata[c] === acc_t'(sum),
                  $sformatf("C[%0d][%0d] got %0d exp %0d", i, j, o_rdata[c], acc_t'(sum)));
          end
        end
      end
  endtask

  initial begin
    a_we = 0; b_we = 0; o_re = 0; start = 0;
    a_tier = 0; b_tier = 0; a_waddr = 0; b_waddr = 0; o_raddr = 0;
    a_wdata = '0; b_wdata = '0; m = 0; n = 0; k = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    gemm(4, 4, 12);     // one fold, K divisible by L
    gemm(9, 6, 10);     // 3 x 2 folds, partial folds, padded K
    gemm(8, 8, 2);      // K smaller than L: tier 2 gets only zeros
    gemm(5, 11, 31);    // 2 x 3 folds
    // refused: ceil(70/4) * ceil(12/3) = 72 A words > 64
    @(negedge clk);
    m = 16'(70); n = 16'(4); k = 16'(12); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    if (done && err) n_refused++;
    check(done && err, "too-large workload refused");
    @(negedge clk);
    $display("mechanisms: folds=%0d vertical_adds=%0d drain_cycles=%0d padded_K=%0d partial_folds=%0d refused=%0d",
             n_folds, n_vadd, n_drain, n_pad, n_partial, n_refused);
    check(n_folds > 0, "folds happened");
    check(n_vadd > 0, "vertical adds happened");
    check(n_drain > 0, "drains happened");
    check(n_pad > 0, "padded K happened");
    check(n_partial > 0, "partial folds happened");
    check(n_refused > 0, "refusal happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
