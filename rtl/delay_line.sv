// delay_line -- fixed-depth shift register of W-bit words.
//
// Carries LLR vectors, partial sums, path metrics, path pointers and the
// repeated-information side band alongside the unrolled pipeline so that
// they meet the data they are combined with. DEPTH = 0 is a plain wire.
// The paper draws its delay lines as shift registers and mentions clock-gated
// circular buffers for deep ones; this design always uses shift registers.
// No reset: the contents are data, qualified by a separate valid chain.
//
// Lint note: a DEPTH = 0 instance is a plain wire and leaves clk unused.
module delay_line #(
  parameter int W     = 8,
  parameter int DEPTH = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_sr
    logic [W-1:0] sr [DEPTH];
    always_ff @(posedge clk) begin
      sr[0] <= d;
      for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
    assign q = sr[DEPTH-1];
  end
endmodule
