// delay_line: a register chain that delays a word by DEPTH clocks.
//
// Used to carry operands alongside the arithmetic operators so that every
// operand of an operation arrives in the same clock as the result it is
// combined with. The data registers have no reset: the pipeline only reads
// them under a valid bit that is reset elsewhere.
//
// Interface: d is sampled on every rising edge of clk; q is d delayed by DEPTH
// clocks. DEPTH = 0 is a plain wire.
module delay_line #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [DEPTH];
    always_ff @(posedge clk) begin
      stage[0] <= d;
      for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
    end
    assign q = stage[DEPTH-1];
  end

endmodule
