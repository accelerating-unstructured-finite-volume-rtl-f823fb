// memory_unit: the on-chip node store of the processor, a true dual-port
// block RAM used as a circular buffer of node records.
//
// Port A (AddrA, DIA, DOA) is shared in time between writing newly loaded
// nodes at the Write Address and reading the current node at Node AddressA;
// port B (AddrB, DOB) reads neighbour records at Node AddressB. The caller
// wraps addresses at DEPTH, so the buffer does not have to be a power of two
// deep. The default of 38,912 nodes of 448 bits is the double-precision
// configuration in which all block RAMs of the FPGA hold node data.
//
// Timing: both ports read synchronously; dout_a/dout_b hold the word at the
// address presented one cycle earlier. A read on port A in the cycle of a
// write to the same address returns the old word.
module memory_unit #(
  parameter int unsigned W     = 448,
  parameter int unsigned DEPTH = 38912,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en_a,
  input  logic          we_a,
  input  logic [AW-1:0] addr_a,
  input  logic [W-1:0]  din_a,
  output logic [W-1:0]  dout_a,
  input  logic          en_b,
  input  logic [AW-1:0] addr_b,
  output logic [W-1:0]  dout_b
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en_a) begin
      dout_a <= mem[addr_a];
      if (we_a) mem[addr_a] <= din_a;
    end
  end

  always_ff @(posedge clk) begin
    if (en_b) dout_b <= mem[addr_b];
  end

  a_addr_a_range: assert property (@(posedge clk) en_a |-> 32'(addr_a) < DEPTH);
  a_addr_b_range: assert property (@(posedge clk) en_b |-> 32'(addr_b) < DEPTH);

endmodule
