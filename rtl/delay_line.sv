// delay_line -- DEPTH-stage register pipeline of a W-bit value.
//
// The skew and de-skew logic around the processing array uses it to line up
// activations, biases and results in time. out(t + DEPTH) = in(t); with
// DEPTH = 0 it is a wire. The registers reset to zero (asynchronous,
// active-low).
module delay_line #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] in,
  output logic [W-1:0] out
);

  if (DEPTH == 0) begin : g_wire
    assign out = in;
  end else begin : g_regs
    logic [W-1:0] q [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int unsigned i = 0; i < DEPTH; i++) q[i] <= '0;
      end else begin
        q[0] <= in;
        for (int unsigned i = 1; i < DEPTH; i++) q[i] <= q[i-1];
      end
    end
    assign out = q[DEPTH-1];
  end

endmodule
