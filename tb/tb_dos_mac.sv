// tb_dos_mac: self-checking test of one dos_mac.
//
// Drives a random sequence of control tokens (first product, further
// products, vertical adds, idle cycles) and drain cycles, and compares the
// accumulator after every clock with a reference model kept in the
// testbench, including 16-bit wrap-around. Also checks that a, b and the
// token are forwarded with exactly one cycle of delay.
module tb_dos_mac;
  import dos_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  data_t a_in, b_in, a_out, b_out;
  tok_t  tok_in, tok_out;
  acc_t  psum_up, acc_north, acc;
  logic  drain;

  int checks = 0, failures = 0;

  dos_mac dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    acc_t  ref_acc;
    data_t pa, pb;
    tok_t  pt;
    int    kind;
    a_in = '0; b_in = '0; tok_in = TOK_IDLE; psum_up = '0; acc_north = '0; drain = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    ref_acc = '0;
    check(acc == 0, "reset value");
    for (int i = 0; i < 400; i++) begin
      kind = $urandom_range(0, 9);
      a_in = data_t'($urandom); b_in = data_t'($urandom);
      psum_up = acc_t'($urandom); acc_north = acc_t'($urandom);
      drain = 1'b0; tok_in = TOK_IDLE;
      if (i == 0 || kind == 0) tok_in = '{valid: 1'b1, first: 1'b1, vadd: 1'b0};
      else if (kind < 6)       tok_in = '{valid: 1'b1, first: 1'b0, vadd: 1'b0};
      else if (kind == 6)      tok_in = '{valid: 1'b0, first: 1'b0, vadd: 1'b1};
      else if (kind == 7)      drain = 1'b1;
      // reference
      if (drain)               ref_acc = acc_north;
      else if (tok_in.vadd)    ref_acc = ref_acc + psum_up;
      else if (tok_in.valid)   ref_acc = (tok_in.first ? acc_t'(0) : ref_acc) +
                                         acc_t'(int'(a_in) * int'(b_in));
      pa = a_in; pb = b_in; pt = tok_in;
      @(negedge clk);
      check(acc == ref_acc, $sformatf("acc step %0d: got %0d exp %0d", i, acc, ref_acc));
      check(a_out == pa && b_out == pb && tok_out == pt, $sformatf("forward step %0d", i));
    end
    // A long dot product of extreme values wraps modulo 2^16.
    tok_in = '{valid: 1'b1, first: 1'b1, vadd: 1'b0};
    a_in = -128; b_in = -128;
    @(negedge clk);
    tok_in.first = 1'b0;
    repeat (4) @(negedge clk);
    tok_in = TOK_IDLE;
    @(negedge clk);
    check(acc == acc_t'(5 * 16384), "wrap-around of a 5-term dot product");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
