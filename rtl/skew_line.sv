// skew_line: a fixed delay of DELAY clock cycles for a WIDTH-bit lane,
// built as a shift register that resets to zero. DELAY = 0 is a wire.
// The tier feeders use one per array row and column to give the edge
// operands the diagonal skew of an output-stationary systolic array.
module skew_line #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DELAY = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (DELAY == 0) begin : g_wire
    assign q = d;
  end else begin : g_pipe
    logic [WIDTH-1:0] pipe [DELAY];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < DELAY; i++) pipe[i] <= '0;
      end else begin
        pipe[0] <= d;
        for (int i = 1; i < DELAY; i++) pipe[i] <= pipe[i-1];
      end
    end
    assign q = pipe[DELAY-1];
  end

endmodule
