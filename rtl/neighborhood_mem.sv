// neighborhood_mem: small memory that holds the neighbours of the nodes in
// flight between the Memory unit and the arithmetic unit.
//
// One write port is filled from the Memory unit's port B; NRD read ports
// deliver the entries of one stencil at once. A stencil on a line (one
// neighbour per face, as in the cell-centred Euler solver) needs one read
// port, a stencil on a triangle two and one on a tetrahedron three. The
// default depth of 64 entries is the size quoted as usually sufficient; such
// a memory maps onto distributed (LUT) RAM.
//
// Timing: writes take effect at the clock edge; reads are asynchronous, so
// rdata[k] shows entry raddr[k] in the same cycle.
module neighborhood_mem #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned NRD   = 1,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr [NRD],
  output logic [W-1:0]  rdata [NRD]
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int k = 0; k < NRD; k++) rdata[k] = mem[raddr[k]];
  end

endmodule
