// tb_dos_controller: self-checking test of the fold sequencer.
//
// With L = 3 tiers of 4 x 4 MACs, a GEMM of M = 9, N = 6, K = 10 needs
// ceil(9/4) * ceil(6/4) = 6 folds of KT = ceil(10/3) = 4. The testbench
// checks that fold_start pulses every P = 2R + C + KT + L - 2 cycles with
// base addresses a_base = mf*KT and b_base = nf*KT (N folds innermost);
// that drain is high for R cycles starting P - R + 1 cycles after each
// fold_start, writing output rows R-1 .. 0 of that fold; that done comes
// folds*P + 2 cycles after start; and that a workload that does not fit the
// scratchpads ends at once with err. A second run with L = 1 checks the 2D
// fold period 2R + C + K - 2.
module tb_dos_controller;
  localparam int R = 4, C = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // two instances: 3 tiers and 1 tier
  logic        start [2];
  logic [15:0] m [2], n [2], k [2];
  logic        busy [2], done [2], err [2], fold_start [2], drain [2], o_we [2];
  logic [5:0]  a_base [2], b_base [2], o_waddr [2];
  logic [15:0] kt [2];

  dos_controller #(.L(3), .R(R), .C(C), .A_DEPTH(64), .B_DEPTH(64), .O_DEPTH(64)) u3 (
    .clk, .rst_n, .start(start[0]), .m(m[0]), .n(n[0]), .k(k[0]),
    .busy(busy[0]), .done(done[0]), .err(err[0]), .fold_start(fold_start[0]),
    .a_base(a_base[0]), .b_base(b_base[0]), .kt(kt[0]), .drain(drain[0]),
    .o_we(o_we[0]), .o_waddr(o_waddr[0]));
  dos_controller #(.L(1), .R(R), .C(C), .A_DEPTH(64), .B_DEPTH(64), .O_DEPTH(64)) u1 (
    .clk, .rst_n, .start(start[1]), .m(m[1]), .n(n[1]), .k(k[1]),
    .busy(busy[1]), .done(done[1]), .err(err[1]), .fold_start(fold_start[1]),
    .a_base(a_base[1]), .b_base(b_base[1]), .kt(kt[1]), .drain(drain[1]),
    .o_we(o_we[1]), .o_waddr(o_waddr[1]));

  task automatic run(input int u, input int l, input int mm, input int nn, input int kk);
    int mf_tot, nf_tot, ktv, p, folds, cyc, fold, last_fs, drains, exp_done;
    int fs_cyc [$];
    mf_tot = (mm + R - 1) / R; nf_tot = (nn + C - 1) / C; ktv = (kk + l - 1) / l;
    p = 2*R + C + ktv - 2 + ((l > 1) ? l : 0);
    folds = mf_tot * nf_tot;
    exp_done = folds * p + 2;
    @(negedge clk);
    m[u] = 16'(mm); n[u] = 16'(nn); k[u] = 16'(kk); start[u] = 1'b1;
    @(negedge clk);
    start[u] = 1'b0;
    cyc = 1; fold = 0; drains = 0;
    while (!done[u] && cyc < 100000) begin
      if (fold_start[u]) begin
        check(a_base[u] == 6'((fold / nf_tot) * ktv) && b_base[u] == 6'((fold % nf_tot) * ktv),
              $sformatf("bases of fold %0d", fold));
        check(kt[u] == 16'(ktv), "kt");
        if (fold > 0) check(cyc - last_fs == p, $sformatf("fold period %0d exp %0d", cyc - last_fs, p));
        fs_cyc.push_back(cyc);
        last_fs = cyc;
        fold++;
      end
      if (drain[u]) begin
        int f, i;
        f = drains / R; i = drains % R;
        check(f < fs_cyc.size() && cyc == fs_cyc[f] + p - R + 1 + i,
              $sformatf("drain %0d at cycle %0d", drains, cyc));
        check(o_we[u] && o_waddr[u] == 6'(f * R + R - 1 - i), $sformatf("o_waddr %0d", o_waddr[u]));
        drains++;
      end
      @(negedge clk);
      cyc++;
    end
    check(!err[u], "no error");
    check(fold == folds, $sformatf("fold count %0d exp %0d", fold, folds));
    check(drains == folds * R, "drain count");
    check(cyc == exp_done, $sformatf("done after %0d cycles, expected %0d", cyc, exp_done));
    @(negedge clk);
    check(!busy[u] && !done[u], "idle after done");
  endtask

  initial begin
    for (int u = 0; u < 2; u++) begin start[u] = 0; m[u] = 0; n[u] = 0; k[u] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(0, 3, 9, 6, 10);
    run(1, 1, 5, 8, 7);
    run(0, 3, 4, 4, 1);
    // does not fit: 17 M folds * 4 words of K > 64
    @(negedge clk);
    m[0] = 16'(68); n[0] = 16'(4); k[0] = 16'(12); start[0] = 1'b1;
    @(negedge clk);
    start[0] = 1'b0;
    check(done[0] && err[0] && !fold_start[0], "refused workload ends with err");
    // zero dimension
    @(negedge clk);
    m[0] = 16'(4); n[0] = 16'(4); k[0] = 16'(0); start[0] = 1'b1;
    @(negedge clk);
    start[0] = 1'b0;
    check(done[0] && err[0], "zero K refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
