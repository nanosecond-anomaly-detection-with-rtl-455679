// ae_pipe -- fixed delay line of STAGES registers for a W-bit word.
//
// Used to carry the event x alongside the tree engines so that it reaches
// the distance processor in the same clock as the estimates derived from
// it. d appears on q STAGES clocks later. STAGES = 0 is a plain wire.
// The block diagram only draws this copy of x as a wire; the delay that
// matches it to the pipelined tree engines is this design's addition.
module ae_pipe #(
  parameter int unsigned W      = 8,
  parameter int unsigned STAGES = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  if (STAGES == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [STAGES];
    always_ff @(posedge clk) begin
      r[0] <= d;
      for (int s = 1; s < STAGES; s++) r[s] <= r[s-1];
    end
    assign q = r[STAGES-1];
  end

endmodule
