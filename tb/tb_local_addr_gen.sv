// tb_local_addr_gen: random current positions and neighbour offsets, both
// inside and outside the window; checks the wrapped address
// (idx mod DEPTH, computed here with a modulo), the miss flag, the face slot
// count along rows closed by the next-node bit, and the one-cycle latency.
module tb_local_addr_gen;
  import fv_pkg::*;
  localparam int DEPTH = 38912, REACH = DEPTH / 2 - 2;
  localparam int AW = $clog2(DEPTH);
  logic clk = 1'b0, rst_n = 1'b1;
  // reset falls before the first clock edge, so every flop starts reset
  initial #2 rst_n = 1'b0;
  logic in_valid = 1'b0, last = 1'b0;
  logic [IDX_W-1:0] idx = '0, cur_pos = '0;
  logic [AW-1:0] cur_addr = '0;
  logic out_valid, row_end, miss;
  logic [AW-1:0] addr_b;
  logic [1:0] slot;
  int checks = 0, failures = 0;
  int misses = 0, slot_exp = 0;

  always #5 clk = ~clk;
  local_addr_gen #(.DEPTH(DEPTH), .REACH(REACH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      int pos, off, nb, e_addr, rowlen;
      bit e_miss, e_last;
      @(negedge clk);
      pos = 100000 + int'($urandom_range(1000000));
      off = int'($urandom_range(2 * REACH + 40)) - REACH - 20;
      nb  = pos + off;
      e_last = ($urandom_range(2) == 0) || slot_exp == 2;
      in_valid = 1'b1;
      idx = IDX_W'(nb); cur_pos = IDX_W'(pos); cur_addr = AW'(pos % DEPTH); last = e_last;
      e_addr = nb % DEPTH;
      e_miss = (off > REACH) || (off < -REACH);
      @(posedge clk); #1;
      in_valid = 1'b0;
      checks++;
      if (!out_valid || row_end != e_last || int'(slot) != slot_exp ||
          miss != e_miss || (!e_miss && int'(addr_b) != e_addr)) begin
        failures++;
        if (failures < 10) $display("FAIL off=%0d addr=%0d exp=%0d miss=%b slot=%0d/%0d", off, addr_b, e_addr, miss, slot, slot_exp);
      end
      if (e_miss) misses++;
      slot_exp = e_last ? 0 : slot_exp + 1;
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL valid held"); end
    end
    checks++;
    if (misses == 0) begin failures++; $display("FAIL no miss case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
