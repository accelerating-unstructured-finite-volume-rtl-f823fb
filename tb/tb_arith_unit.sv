// tb_arith_unit: drives random triangles (three faces each, random
// neighbours and face normals) into the arithmetic unit at one face per cycle,
// with occasional idle cycles, and compares every updated state with the
// reference model. It also checks the 16-cycle latency from the last face to
// the result and that one triangle completes every three cycles when the
// input is continuous.
module tb_arith_unit;
  import fp_pkg::*;
  import fv_pkg::*;
  import fv_ref_pkg::*;

  localparam int NTRI = 400;
  localparam int LAT  = 16;
  localparam real DT  = 1.0e-3;

  logic clk = 1'b0, rst_n = 1'b1;
  // reset falls before the first clock edge, so every flop starts reset
  initial #2 rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [1:0] in_slot = '0;
  node_rec_t in_cur, in_nb;
  fp_t in_nx, in_ny, in_len;
  logic out_valid;
  state_t out_state;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  arith_unit dut (.clk, .rst_n, .dt(b(DT)), .in_valid, .in_slot, .in_cur, .in_nb,
                  .in_nx, .in_ny, .in_len, .out_valid, .out_state);

  rstate_t exp_q [$];
  int      tlast_q [$];
  int      cyc = 0;
  int      first_out = -1, last_out = -1, nout = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      rstate_t e, g;
      int t;
      g = to_r(out_state);
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        e = exp_q.pop_front();
        t = tlast_q.pop_front();
        checks++;
        if (!(close(g.rho, e.rho, 1.0) && close(g.mu, e.mu, 1.0) &&
              close(g.mv, e.mv, 1.0) && close(g.e, e.e, 1.0))) begin
          failures++;
          if (failures < 10) $display("FAIL state got %g %g %g %g exp %g %g %g %g",
                                      g.rho, g.mu, g.mv, g.e, e.rho, e.mu, e.mv, e.e);
        end
        checks++;
        if (cyc - t != LAT) begin
          failures++; $display("FAIL latency %0d", cyc - t);
        end
      end
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      nout++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < NTRI; n++) begin
      rstate_t L, sum;
      real area;
      L = rand_state();
      area = urand(0.01, 0.1);
      sum = '{0.0, 0.0, 0.0, 0.0};
      for (int f = 0; f < 3; f++) begin
        rstate_t R, fl;
        real th, len;
        R  = rand_state();
        th = urand(0.0, 6.2831853);
        len = urand(0.1, 1.0);
        fl = face_flux(L, R, $cos(th), $sin(th), len);
        sum.rho += fl.rho; sum.mu += fl.mu; sum.mv += fl.mv; sum.e += fl.e;
        // idle cycles between faces in the second half of the run
        if (n >= NTRI / 2 && $urandom_range(3) == 0) begin
          in_valid <= 1'b0;
          @(posedge clk);
        end
        in_valid <= 1'b1;
        in_slot  <= 2'(f);
        in_cur   <= make_rec(L, area);
        in_nb    <= make_rec(R, 1.0);
        in_nx    <= b($cos(th));
        in_ny    <= b($sin(th));
        in_len   <= b(len);
        @(posedge clk);
        if (f == 2) begin
          rstate_t e;
          e.rho = L.rho - DT / area * sum.rho;
          e.mu  = L.mu  - DT / area * sum.mu;
          e.mv  = L.mv  - DT / area * sum.mv;
          e.e   = L.e   - DT / area * sum.e;
          exp_q.push_back(e);
          tlast_q.push_back(cyc);
        end
      end
      if (n == NTRI / 2 - 1) begin
        in_valid <= 1'b0;
        repeat (LAT + 2) @(posedge clk);
        // continuous first half: NTRI/2 triangles in 3*(NTRI/2 - 1) cycles
        checks++;
        if (nout != NTRI / 2 || last_out - first_out != 3 * (NTRI / 2 - 1)) begin
          failures++; $display("FAIL throughput: %0d results over %0d cycles", nout, last_out - first_out);
        end
      end
    end
    in_valid <= 1'b0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || nout != NTRI) begin
      failures++; $display("FAIL missing results %0d", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
