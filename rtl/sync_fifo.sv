// sync_fifo: single-clock first-word-fall-through FIFO with valid/ready on
// both sides.
//
// The processor reads its node-data and face-descriptor arrays from off-chip
// memory into such buffers in long bursts, and queues its results in one
// before they are written back. Storage is a register array addressed by
// read and write pointers; count gives the fill level.
//
// Timing: a word pushed in cycle t (in_valid && in_ready) is visible on
// out_data in cycle t+1. in_ready is low only when the FIFO is full; out_valid
// is high whenever it is not empty.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [W-1:0]           in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [W-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic          push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // The fill level never exceeds the depth.
  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                  32'(count) <= DEPTH);

endmodule
