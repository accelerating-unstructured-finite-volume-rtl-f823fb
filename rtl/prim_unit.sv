// prim_unit: computes the pressure and the speed of sound of every node as
// it is loaded, so that the Memory unit stores them next to the state.
//
//   p = (gamma - 1) * (E - ((rho*u)^2 + (rho*v)^2) / (2*rho))
//   c = sqrt(gamma * p / rho),     gamma = 1.4
//
// It is a nine-stage chain of fp_unit operators (mul, add, div, /2, sub, mul,
// mul, div, sqrt), one register per operator; the node record and p travel
// beside the chain in delay registers. The equations are the paper's; the
// operator order and the single-cycle operators are this design's choice.
//
// Timing: fully pipelined, one node per cycle, LATENCY = 9 cycles from
// in_valid to out_valid. No back-pressure: the caller reserves room for the
// output before it presents a node.
module prim_unit
  import fp_pkg::*;
  import fv_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  node_in_t  in_node,
  output logic      out_valid,
  output logic      out_ex,
  output node_rec_t out_rec
);

  localparam int unsigned LATENCY = 9;

  fp_t  mu2, mv2, ke2, q, ke, ei, p, gp, c2, c;
  logic v1, v2, v3, v4, v5, v6, v7, v8, v9, unused_v;
  fp_t  rho2, e4, rho7;
  node_in_t n9;
  fp_t  p9;

  // Stage 1: squares of the momenta.
  fp_unit #(.OP(FP_MUL)) u_mu2 (.clk, .rst_n, .in_valid, .a(in_node.u.mu), .b(in_node.u.mu), .out_valid(v1), .y(mu2));
  fp_unit #(.OP(FP_MUL)) u_mv2 (.clk, .rst_n, .in_valid, .a(in_node.u.mv), .b(in_node.u.mv), .out_valid(unused_v), .y(mv2));
  // Stage 2..5: kinetic energy and internal energy.
  fp_unit #(.OP(FP_ADD))  u_ke2 (.clk, .rst_n, .in_valid(v1), .a(mu2), .b(mv2), .out_valid(v2), .y(ke2));
  fp_unit #(.OP(FP_DIV))  u_q   (.clk, .rst_n, .in_valid(v2), .a(ke2), .b(rho2), .out_valid(v3), .y(q));
  fp_unit #(.OP(FP_HALF)) u_ke  (.clk, .rst_n, .in_valid(v3), .a(q), .b(FP_ZERO), .out_valid(v4), .y(ke));
  fp_unit #(.OP(FP_SUB))  u_ei  (.clk, .rst_n, .in_valid(v4), .a(e4), .b(ke), .out_valid(v5), .y(ei));
  // Stage 6..9: pressure and speed of sound.
  fp_unit #(.OP(FP_MUL))  u_p   (.clk, .rst_n, .in_valid(v5), .a(ei), .b(FP_GAMMA_M1), .out_valid(v6), .y(p));
  fp_unit #(.OP(FP_MUL))  u_gp  (.clk, .rst_n, .in_valid(v6), .a(p), .b(FP_GAMMA), .out_valid(v7), .y(gp));
  fp_unit #(.OP(FP_DIV))  u_c2  (.clk, .rst_n, .in_valid(v7), .a(gp), .b(rho7), .out_valid(v8), .y(c2));
  fp_unit #(.OP(FP_SQRT)) u_c   (.clk, .rst_n, .in_valid(v8), .a(c2), .b(FP_ZERO), .out_valid(v9), .y(c));

  // Operands that skip levels of the graph.
  delay_line #(.W($bits(fp_t)), .N(2)) d_rho2 (.clk, .d(in_node.u.rho), .q(rho2));
  delay_line #(.W($bits(fp_t)), .N(4)) d_e4   (.clk, .d(in_node.u.e),   .q(e4));
  delay_line #(.W($bits(fp_t)), .N(7)) d_rho7 (.clk, .d(in_node.u.rho), .q(rho7));
  delay_line #(.W($bits(node_in_t)), .N(LATENCY)) d_node (.clk, .d(in_node), .q(n9));
  delay_line #(.W($bits(fp_t)), .N(3)) d_p    (.clk, .d(p), .q(p9));

  assign out_valid = v9;
  assign out_ex    = n9.ex;
  always_comb begin
    out_rec.u    = n9.u;
    out_rec.area = n9.area;
    out_rec.p    = p9;
    out_rec.c    = c;
  end

endmodule
