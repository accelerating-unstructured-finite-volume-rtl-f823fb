// local_addr_gen: turns the neighbour index of a connectivity (face)
// descriptor into the Memory unit address of that neighbour, and registers it
// as Node AddressB.
//
// Nodes enter the Memory unit in stream order and each stream position k
// lives at address k mod DEPTH. The generator is told the stream position
// cur_pos of the node whose neighbours are being fetched and that node's
// address cur_addr; it forms the offset idx - cur_pos, adds it to cur_addr
// and wraps the sum into [0, DEPTH). No division is needed because a
// neighbour is never further than the window from the current node. An
// offset outside [-REACH, REACH] names a node that is not on chip (the
// on-chip memory is too small for the mesh numbering) and raises miss.
// The generator also follows the next-node bit: slot counts the faces of the
// current node, and row_end marks the descriptor that closes it.
//
// Timing: one descriptor per cycle; outputs appear one cycle after in_valid.
module local_addr_gen
  import fv_pkg::*;
#(
  parameter int unsigned DEPTH = 38912,
  parameter int unsigned REACH = DEPTH / 2 - 2,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] idx,
  input  logic             last,
  input  logic [IDX_W-1:0] cur_pos,
  input  logic [AW-1:0]    cur_addr,
  output logic             out_valid,
  output logic [AW-1:0]    addr_b,
  output logic [1:0]       slot,
  output logic             row_end,
  output logic             miss
);

  logic signed [IDX_W+1:0] off, sum;
  logic [1:0]              slot_cnt;

  always_comb begin
    off = $signed({2'b00, idx}) - $signed({2'b00, cur_pos});
    sum = $signed({{(IDX_W+2-AW){1'b0}}, cur_addr}) + off;
    if (sum < 0)                              sum = sum + $signed((IDX_W+2)'(DEPTH));
    else if (sum >= $signed((IDX_W+2)'(DEPTH))) sum = sum - $signed((IDX_W+2)'(DEPTH));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      addr_b    <= '0;
      slot      <= '0;
      row_end   <= 1'b0;
      miss      <= 1'b0;
      slot_cnt  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        addr_b   <= sum[AW-1:0];
        slot     <= slot_cnt;
        row_end  <= last;
        miss     <= (off > $signed((IDX_W+2)'(REACH))) ||
                    (off < -$signed((IDX_W+2)'(REACH)));
        slot_cnt <= last ? 2'd0 : slot_cnt + 2'd1;
      end
    end
  end

endmodule
