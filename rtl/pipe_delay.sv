// pipe_delay: a plain register chain of DEPTH stages on a WIDTH-bit bus.
// Used throughout the point processor to keep operands that skip a pipeline
// band aligned with the results of that band. DEPTH == 0 is a wire.
// No reset: the chain carries data only; the valid bits that qualify the data
// travel on their own reset chains.
module pipe_delay #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 1
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] sr [DEPTH];
    always_ff @(posedge clk) begin
      sr[0] <= d;
      for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
    assign q = sr[DEPTH-1];
  end
endmodule
