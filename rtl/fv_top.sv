// fv_top: the accelerator as placed on one FPGA, NUM_PE finite volume
// processors working side by side. Each processor has its own node-data,
// face-descriptor and result streams (in the board each would be served by
// its own off-chip memory channel) and works on its own part of the mesh or
// its own access pattern; the time step and the start pulse are shared.
//
// The default of three processors is the number that fits the target FPGA in
// double precision. Because the processors are independent, throughput grows
// linearly with NUM_PE: each updates one triangle every three cycles.
//
// Interface: per processor k, num_nodes[k] gives the length of its node
// stream; busy[k]/done[k]/miss_err[k]/row_err[k] report its state. All stream
// ports are valid/ready and indexed by processor. The off-chip memory and
// its controller are outside this module; their streams are the ports.
//
// Following the paper: three processors on one device and their linear
// speed-up. This design's choice: the processors run in parallel on separate
// streams rather than chained (one processor's results fed to the next),
// which the paper mentions as another option.
// Lint note: rst_n is the flops' asynchronous reset and also the
// "disable iff" condition of the assertions, so a linter reports it as used
// both ways; the logic itself uses it only as an asynchronous reset.
module fv_top
  import fp_pkg::*;
  import fv_pkg::*;
#(
  parameter int unsigned NUM_PE    = 3,
  parameter int unsigned DEPTH     = 38912,
  parameter int unsigned NBH_DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  fp_t              dt,
  input  logic [IDX_W-1:0] num_nodes  [NUM_PE],
  output logic             busy       [NUM_PE],
  output logic             done       [NUM_PE],
  output logic             miss_err   [NUM_PE],
  output logic             row_err    [NUM_PE],
  input  logic             node_valid [NUM_PE],
  output logic             node_ready [NUM_PE],
  input  node_in_t         node_data  [NUM_PE],
  input  logic             face_valid [NUM_PE],
  output logic             face_ready [NUM_PE],
  input  face_desc_t       face_data  [NUM_PE],
  output logic             res_valid  [NUM_PE],
  input  logic             res_ready  [NUM_PE],
  output state_t           res_data   [NUM_PE]
);

  for (genvar k = 0; k < NUM_PE; k++) begin : g_pe
    fv_processor #(.DEPTH(DEPTH), .NBH_DEPTH(NBH_DEPTH)) u_pe (
      .clk, .rst_n, .start, .num_nodes(num_nodes[k]), .dt,
      .busy(busy[k]), .done(done[k]), .miss_err(miss_err[k]), .row_err(row_err[k]),
      .node_valid(node_valid[k]), .node_ready(node_ready[k]), .node_data(node_data[k]),
      .face_valid(face_valid[k]), .face_ready(face_ready[k]), .face_data(face_data[k]),
      .res_valid(res_valid[k]), .res_ready(res_ready[k]), .res_data(res_data[k]));
  end

endmodule
