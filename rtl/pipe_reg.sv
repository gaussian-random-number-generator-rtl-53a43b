// pipe_reg: a chain of DEPTH enabled registers, used as the output stages of
// the floating-point cores and to delay operands so that they meet results
// of the slower units at the right clock. DEPTH=0 is a plain wire.
// All stages load together when clk_en is high and are cleared
// asynchronously by aclr (active high), as the cores' aclr port requires.
module pipe_reg #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clock,
  input  logic             clk_en,
  input  logic             aclr,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [DEPTH];
    always_ff @(posedge clock or posedge aclr) begin
      if (aclr) begin
        for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else if (clk_en) begin
        stage[0] <= d;
        for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[DEPTH-1];
  end
endmodule
