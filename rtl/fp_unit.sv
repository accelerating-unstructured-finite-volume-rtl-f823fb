// fp_unit: one floating-point operator vertex of the arithmetic unit's
// data-flow graph, with a pipeline of LAT registers behind it.
//
// The operator is fixed by the OP parameter (add, sub, mul, div, sqrt, /2,
// |x|); the arithmetic itself is in fp_pkg (double precision, round to
// nearest even, subnormals flushed to zero). A valid bit travels with the
// data so that the unit can be strung into a stall-free pipeline.
//
// Timing: y and out_valid appear LAT clock cycles after a and b are presented
// with in_valid; one operation may start every cycle. The paper builds these
// operators from vendor floating-point cores; this unit is a self-contained
// replacement whose latency is a parameter.
module fp_unit
  import fp_pkg::*;
#(
  parameter fp_op_e      OP  = FP_ADD,
  parameter int unsigned LAT = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fp_t  a,
  input  fp_t  b,
  output logic out_valid,
  output fp_t  y
);

  fp_t  pipe_d [LAT];
  logic pipe_v [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        pipe_v[i] <= 1'b0;
        pipe_d[i] <= '0;
      end
    end else begin
      pipe_v[0] <= in_valid;
      pipe_d[0] <= fp_apply(OP, a, b);
      for (int i = 1; i < LAT; i++) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
    end
  end

  assign out_valid = pipe_v[LAT-1];
  assign y         = pipe_d[LAT-1];

endmodule
