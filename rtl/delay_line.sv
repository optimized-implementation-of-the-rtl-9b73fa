// delay_line: W-bit shift register of DEPTH stages (DEPTH = 0 is a wire).
// Used to pad pipeline stages to their fixed latency and to carry operands
// (centre spinor, links, valid bits) alongside the arithmetic. No reset:
// the data is qualified by a valid bit travelling in a delay line that the
// caller resets.
module delay_line #(
  parameter int unsigned W     = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_reg
    logic [W-1:0] sr [DEPTH];
    always_ff @(posedge clk) begin
      sr[0] <= d;
      for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
    assign q = sr[DEPTH-1];
  end
endmodule
