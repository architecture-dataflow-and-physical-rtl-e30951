// scratchpad_sram: a simple two-port scratchpad memory (one write port, one
// read port) used for every on-chip buffer of the accelerator: the per-tier
// operand memories for A and B and the output memory of the bottom tier.
//
// The memory is a plain array that synthesis maps to an SRAM macro. A write
// takes effect at the clock edge; a read returns the word one cycle after
// the address is presented (registered output). Reading and writing the
// same address in one cycle returns the old word. Contents are not reset;
// the read register resets to zero. The organisation (word width, depth,
// port count) is this design's choice; the source design treats the
// scratchpad architecture as outside its scope.
module scratchpad_sram #(
  parameter int unsigned WIDTH = 1024,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

  assert property (@(posedge clk) disable iff (!rst_n) we |-> 32'(waddr) < DEPTH)
    else $error("scratchpad_sram: write address out of range");
  assert property (@(posedge clk) disable iff (!rst_n) re |-> 32'(raddr) < DEPTH)
    else $error("scratchpad_sram: read address out of range");

endmodule
