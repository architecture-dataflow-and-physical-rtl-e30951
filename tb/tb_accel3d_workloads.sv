// tb_accel3d_workloads: runs complete GEMM layers of the evaluated DNN
// workloads on a reduced accelerator (3 tiers of 32 x 32 MACs, scratchpads
// deep enough to hold each layer in one pass).
//
// Layers: the ResNet-50 layer M = 512, K = 784, N = 128 (64 folds) and the
// M = N = 128, K = 300 layer used for power and thermal analysis (16
// folds). Operands are random signed 8-bit values. For each layer the
// testbench loads the scratchpads in the documented layout, checks the cycle
// count folds * (2R + C + KT + L - 2) + 2 against the run, and checks every
// output element against a product computed here (modulo 2^16).
module tb_accel3d_workloads;
  import dos_pkg::*;
  localparam int L = 3, R = 32, C = 32, AD = 8192, BD = 2048, OD = 2048;
  localparam int AWA = 13, AWB = 11, AWO = 11;

  logic clk = 1'b0, rst_n = 1'b0;
  logic a_we, b_we, o_re, start, busy, done, err;
  logic [1:0] a_tier, b_tier;
  logic [AWA-1:0] a_waddr;
  logic [AWB-1:0] b_waddr;
  logic [AWO-1:0] o_raddr;
  data_t [R-1:0] a_wdata;
  data_t [C-1:0] b_wdata;
  acc_t  [C-1:0] o_rdata;
  logic [15:0] m, n, k;

  int checks = 0, failures = 0;

  accel3d_top #(.L(L), .R(R), .C(C), .A_DEPTH(AD), .B_DEPTH(BD), .O_DEPTH(OD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic layer(input string name, input int mm, input int kk, input int nn);
    int am [][], bm [][];
    int mf, nf, ktv, p, cyc, exp_cyc;
    am = new[mm]; foreach (am[i]) am[i] = new[kk];
    bm = new[kk]; foreach (bm[i]) bm[i] = new[nn];
    foreach (am[i, j]) am[i][j] = $urandom_range(0, 255) - 128;
    foreach (bm[i, j]) bm[i][j] = $urandom_range(0, 255) - 128;
    mf = (mm + R - 1) / R; nf = (nn + C - 1) / C; ktv = (kk + L - 1) / L;
    for (int t = 0; t < L; t++) begin
      for (int f = 0; f < mf; f++) for (int s = 0; s < ktv; s++) begin
        @(negedge clk);
        a_we = 1'b1; a_tier = 2'(t); a_waddr = AWA'(f * ktv + s);
        for (int r = 0; r < R; r++) begin
          int i, kx;
          i = f * R + r; kx = t * ktv + s;
          a_wdata[r] = (i < mm && kx < kk) ? data_t'(am[i][kx]) : '0;
        end
      end
      @(negedge clk);
      a_we = 1'b0;
      for (int f = 0; f < nf; f++) for (int s = 0; s < ktv; s++) begin
        @(negedge clk);
        b_we = 1'b1; b_tier = 2'(t); b_waddr = AWB'(f * ktv + s);
        for (int c = 0; c < C; c++) begin
          int j, kx;
          j = f * C + c; kx = t * ktv + s;
          b_wdata[c] = (j < nn && kx < kk) ? data_t'(bm[kx][j]) : '0;
        end
      end
      @(negedge clk);
      b_we = 1'b0;
    end
    @(negedge clk);
    m = 16'(mm); n = 16'(nn); k = 16'(kk); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < 2000000) begin
      @(negedge clk);
      cyc++;
    end
    check(!err, {name, " accepted"});
    p = 2*R + C + ktv + L - 2;
    exp_cyc = mf * nf * p + 2;
    check(cyc == exp_cyc, $sformatf("%s: %0d cycles, expected %0d", name, cyc, exp_cyc));
    for (int fm = 0; fm < mf; fm++) for (int fn = 0; fn < nf; fn++)
      for (int r = 0; r < R; r++) begin
        int i;
        i = fm * R + r;
        @(negedge clk);
        o_re = 1'b1; o_raddr = AWO'((fm * nf + fn) * R + r);
        @(negedge clk);
        o_re = 1'b0;
        if (i < mm) for (int c = 0; c < C; c++) begin
          int j, sum;
          j = fn * C + c;
          if (j < nn) begin
            sum = 0;
            for (int x = 0; x < kk; x++) sum += am[i][x] * bm[x][j];
            check(o_rdata[c] === acc_t'(sum),
                  $sformatf("%s C[%0d][%0d] got %0d exp %0d", name, i, j, o_rdata[c], acc_t'(sum)));
          end
        end
      end
    $display("%s: M=%0d K=%0d N=%0d, %0d folds, %0d cycles", name, mm, kk, nn, mf * nf, cyc);
  endtask

  initial begin
    a_we = 0; b_we = 0; o_re = 0; start = 0;
    a_tier = 0; b_tier = 0; a_waddr = 0; b_waddr = 0; o_raddr = 0;
    a_wdata = '0; b_wdata = '0; m = 0; n = 0; k = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    layer("ResNet-50 RN1", 512, 784, 128);
    layer("power workload", 128, 300, 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
