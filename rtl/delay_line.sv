// delay_line: N-stage shift register that carries a word alongside a
// pipeline, the "D" (delay) vertices of the arithmetic unit's data-flow
// graph. N = 0 is a plain wire.
module delay_line #(
  parameter int unsigned W = 8,
  parameter int unsigned N = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [N];
    always_ff @(posedge clk) begin
      r[0] <= d;
      for (int i = 1; i < N; i++) r[i] <= r[i-1];
    end
    assign q = r[N-1];
  end
endmodule
