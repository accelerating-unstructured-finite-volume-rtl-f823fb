// tb_prim_unit: random physical states, one per cycle with gaps; checks p
// and c against the reference formulas, that the state, area and ex bit
// pass through unchanged, and the 9-cycle latency.
module tb_prim_unit;
  import fp_pkg::*;
  import fv_pkg::*;
  import fv_ref_pkg::*;
  localparam int LAT = 9;
  logic clk = 1'b0, rst_n = 1'b1;
  // reset falls before the first clock edge, so every flop starts reset
  initial #2 rst_n = 1'b0;
  logic in_valid = 1'b0;
  node_in_t in_node = '0;
  logic out_valid, out_ex;
  node_rec_t out_rec;
  int checks = 0, failures = 0, cyc = 0;
  node_in_t q_in [$];
  int q_t [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  prim_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      node_in_t e;
      rstate_t s;
      int t;
      e = q_in.pop_front();
      t = q_t.pop_front();
      s = to_r(e.u);
      checks++;
      if (out_ex != e.ex || out_rec.u != e.u || out_rec.area != e.area ||
          !close(r(out_rec.p), pressure(s), 1.0) || !close(r(out_rec.c), sound(s), 1.0) ||
          cyc - t != LAT) begin
        failures++;
        if (failures < 10) $display("FAIL p %g/%g c %g/%g lat %0d", r(out_rec.p), pressure(s),
                                    r(out_rec.c), sound(s), cyc - t);
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 1000; n++) begin
      node_in_t x;
      x.ex = 1'($urandom);
      x.u = to_b(rand_state());
      x.area = b(urand(0.01, 0.1));
      in_valid <= 1'b1;
      in_node <= x;
      @(posedge clk);
      q_in.push_back(x);
      q_t.push_back(cyc);
      if ($urandom_range(3) == 0) begin
        in_valid <= 1'b0;
        @(posedge clk);
      end
    end
    in_valid <= 1'b0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (q_in.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
