// tb_fv_top: end-to-end test of the accelerator with three processors.
// Each processor gets the streams of a triangular test mesh with a ghost
// ring (see fv_mesh_pkg) that is longer than its Memory unit:
//   PE 0  random cell states, random gaps in both input streams and heavy
//         random back-pressure on the results (80 %), so that the issue
//         stage runs out of result credit;
//   PE 1  a uniform flow with continuous streams: the update must return the
//         same state (free-stream preservation), and the processor must
//         sustain one update per three cycles;
//   PE 2  random states with one broken descriptor row: a neighbour index
//         outside the on-chip window and a misplaced next-node bit, which
//         must raise miss_err and row_err. Its node stream is slower than
//         the processor (75 % gaps) while its face stream is nearly full
//         (10 % gaps), so the loader starves for node data and node writes
//         compete with current-node reads for port A.
// Results of PE 0 and PE 1 are compared with the reference model in order.
// The test counts how often each mechanism of the processor occurs (prefill,
// port-A write deferred by a current-node read, writer held back by the
// circular-buffer window, buffer wrap-around, ghost skip, loader waiting for
// a descriptor, issue held by result credit, result back-pressure, loader
// starved of node data) and counts
// a failure for any that never happens.
module tb_fv_top;
  import fp_pkg::*;
  import fv_pkg::*;
  import fv_ref_pkg::*;
  import fv_mesh_pkg::*;

  localparam int NPE   = 3;
  localparam int DEPTH = 256;
  localparam int REACH = DEPTH / 2 - 2;
  localparam int GX    = 12;
  localparam int GY    = 30;
  localparam real DT   = 1.0e-4;
  localparam int WATCHDOG = 200000;

  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0;
  // reset falls before the first clock edge, so every flop starts reset
  initial #2 rst_n = 1'b0;
  fp_t  dt;
  assign dt = b(DT);
  logic [IDX_W-1:0] num_nodes [NPE];
  logic busy [NPE], done [NPE], miss_err [NPE], row_err [NPE];
  logic node_valid [NPE], node_ready [NPE];
  node_in_t node_data [NPE];
  logic face_valid [NPE], face_ready [NPE];
  face_desc_t face_data [NPE];
  logic res_valid [NPE], res_ready [NPE];
  state_t res_data [NPE];
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  fv_top #(.DEPTH(DEPTH)) dut (.*);

  node_in_t   nq [NPE][$];
  face_desc_t fq [NPE][$];
  rstate_t    eq [NPE][$];
  int gap_pct [NPE] = '{20, 0, 75};  // PE 2: face stream 10 %
  int bp_pct  [NPE] = '{80, 0, 10};
  int nres [NPE], first_res [NPE], last_res [NPE];

  // mechanism counters
  localparam int NMECH = 9;
  string mech_name [NMECH] = '{"prefill", "port-A write deferred", "window hold",
                               "buffer wrap", "ghost skip", "descriptor wait",
                               "result credit hold", "result back-pressure",
                               "node starvation"};
  int mech [NMECH];
  int nwrites_before_issue [NPE];
  bit issued [NPE];

  for (genvar k = 0; k < NPE; k++) begin : g_drv
    logic n_acc = 1'b0, f_acc = 1'b0, nv_en = 1'b0, fv_en = 1'b0;
    always @(posedge clk) begin
      n_acc <= node_valid[k] && node_ready[k];
      f_acc <= face_valid[k] && face_ready[k];
      nv_en <= ($urandom_range(99) >= gap_pct[k]);
      fv_en <= ($urandom_range(99) >= (k == 2 ? 10 : gap_pct[k]));
      res_ready[k] <= ($urandom_range(99) >= bp_pct[k]);
    end
    always @(negedge clk) begin
      if (n_acc) void'(nq[k].pop_front());
      if (f_acc) void'(fq[k].pop_front());
    end
    assign node_valid[k] = rst_n && nv_en && nq[k].size() > 0;
    assign face_valid[k] = rst_n && fv_en && fq[k].size() > 0;
    assign node_data[k]  = (nq[k].size() > 0) ? nq[k][0] : '0;
    assign face_data[k]  = (fq[k].size() > 0) ? fq[k][0] : '0;

    // result checker
    always @(posedge clk) begin
      if (rst_n && res_valid[k] && res_ready[k]) begin
        rstate_t g, e;
        g = to_r(res_data[k]);
        if (k != 2) begin
          checks++;
          if (eq[k].size() == 0) begin
            failures++; $display("FAIL PE%0d extra result", k);
          end else begin
            e = eq[k].pop_front();
            if (!(close(g.rho, e.rho, 1.0) && close(g.mu, e.mu, 1.0) &&
                  close(g.mv, e.mv, 1.0) && close(g.e, e.e, 1.0))) begin
              failures++;
              if (failures < 10) $display("FAIL PE%0d result %0d got %g %g %g %g exp %g %g %g %g",
                                          k, nres[k], g.rho, g.mu, g.mv, g.e, e.rho, e.mu, e.mv, e.e);
            end
          end
        end
        if (nres[k] == 0) first_res[k] = cyc;
        last_res[k] = cyc;
        nres[k]++;
      end
    end

    // mechanism monitors
    always @(posedge clk) begin
      if (rst_n && dut.g_pe[k].u_pe.run) begin
        if (dut.g_pe[k].u_pe.face_go) issued[k] = 1'b1;
        if (dut.g_pe[k].u_pe.wr_go && !issued[k]) nwrites_before_issue[k]++;
        if (dut.g_pe[k].u_pe.pf_valid && dut.g_pe[k].u_pe.issue_rd &&
            dut.g_pe[k].u_pe.loaded < dut.g_pe[k].u_pe.n_total &&
            dut.g_pe[k].u_pe.loaded < dut.g_pe[k].u_pe.ip + (DEPTH - REACH)) mech[1]++;
        if (dut.g_pe[k].u_pe.pf_valid && !dut.g_pe[k].u_pe.issue_rd &&
            dut.g_pe[k].u_pe.loaded < dut.g_pe[k].u_pe.n_total &&
            !(dut.g_pe[k].u_pe.loaded < dut.g_pe[k].u_pe.ip + (DEPTH - REACH))) mech[2]++;
        if (dut.g_pe[k].u_pe.wr_go && dut.g_pe[k].u_pe.wr_addr == 16'(DEPTH - 1)) mech[3]++;
        if (dut.g_pe[k].u_pe.iss_skip) mech[4]++;
        if (dut.g_pe[k].u_pe.ld_node_ok && dut.g_pe[k].u_pe.ld_ex && !dut.g_pe[k].u_pe.ff_valid) mech[5]++;
        if (dut.g_pe[k].u_pe.ip < dut.g_pe[k].u_pe.n_total && dut.g_pe[k].u_pe.lp > dut.g_pe[k].u_pe.ip &&
            dut.g_pe[k].u_pe.iss_ex && dut.g_pe[k].u_pe.out_cnt >= 16) mech[6]++;
      end
      if (rst_n && dut.g_pe[k].u_pe.run && issued[k] && dut.g_pe[k].u_pe.lp < dut.g_pe[k].u_pe.n_total &&
          !dut.g_pe[k].u_pe.ld_node_ok && !dut.g_pe[k].u_pe.pf_valid) mech[8]++;
      if (rst_n && res_valid[k] && !res_ready[k]) mech[7]++;
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NPE; k++) begin
      node_in_t   tn [$];
      face_desc_t tf [$];
      rstate_t    te [$];
      build_grid(GX, GY, k == 1, DT, (k == 2) ? 40 : -1, REACH, tn, tf, te);
      nq[k] = tn; fq[k] = tf; eq[k] = te;
      num_nodes[k] = IDX_W'(tn.size());
      nres[k] = 0; nwrites_before_issue[k] = 0; issued[k] = 1'b0;
    end
    for (int m = 0; m < NMECH; m++) mech[m] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    repeat (2) @(posedge clk);
    while (busy[0] || busy[1] || busy[2]) @(posedge clk);
    repeat (2) @(posedge clk);
    mech[0] = nwrites_before_issue[0] + nwrites_before_issue[1] + nwrites_before_issue[2];
    for (int k = 0; k < 2; k++) begin
      checks++;
      if (eq[k].size() != 0 || miss_err[k] || row_err[k]) begin
        failures++; $display("FAIL PE%0d: %0d results missing, miss=%b row=%b", k, eq[k].size(), miss_err[k], row_err[k]);
      end
    end
    // the uniform flow stays uniform: compare with the input state too
    checks++;
    if (nres[1] != (GX - 2) * (GY - 2) * 2) begin failures++; $display("FAIL PE1 count %0d", nres[1]); end
    // PE 1 streams are continuous: one update per three cycles, plus at
    // most one cycle at the loader and one at the issue stage for each of
    // the four ghosts between two mesh rows
    checks++;
    if (last_res[1] - first_res[1] > 3 * (nres[1] - 1) + 8 * (GY - 2)) begin
      failures++; $display("FAIL PE1 rate: %0d results in %0d cycles", nres[1], last_res[1] - first_res[1]);
    end
    checks++;
    if (!miss_err[2] || !row_err[2]) begin failures++; $display("FAIL PE2 flags miss=%b row=%b", miss_err[2], row_err[2]); end
    for (int m = 0; m < NMECH; m++) begin
      $display("mechanism %-24s %0d", mech_name[m], mech[m]);
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL mechanism never happened: %s", mech_name[m]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
