// tb_scratchpad_sram: self-checking test of scratchpad_sram.
//
// Writes random words to random addresses while reading others, and checks
// that each read returns the last word written to that address exactly one
// cycle after the read request, that a read in the cycle of a write to the
// same address returns the old word, and that the read data holds while re
// is low.
module tb_scratchpad_sram;
  localparam int W = 40, D = 64, AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  scratchpad_sram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expect_q;
    bit           rd_q;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = {$urandom, $urandom} ; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    rd_q = 0; expect_q = '0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      if (rd_q) begin
        checks++;
        if (rdata !== expect_q) begin
          failures++;
          $display("FAIL read %0d: got %h exp %h", i, rdata, expect_q);
        end
      end else if (i > 0) begin
        checks++;
        if (rdata !== expect_q) begin failures++; $display("FAIL hold %0d", i); end
      end
      we = $urandom_range(0, 1); re = $urandom_range(0, 1);
      waddr = AW'($urandom); wdata = {$urandom, $urandom};
      raddr = (i % 7 == 0) ? waddr : AW'($urandom);
      rd_q = re;
      if (re) expect_q = model[raddr];  // old word when writing the same address
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
