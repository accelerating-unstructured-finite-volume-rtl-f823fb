// tb_fv_processor: runs one processor over a random "mesh" whose node
// stream is longer than the Memory unit, so the circular buffer wraps many
// times. Every node with ex = 1 has three neighbours within the on-chip
// window; some nodes are ghost copies (ex = 0). Input streams have random
// gaps and the result stream random back-pressure. Every result is compared
// with the reference model, in order, and the steady-state rate of one node
// per three cycles is checked in a run with no gaps. A last run sends a
// neighbour index outside the window and expects the miss flag.
module tb_fv_processor;
  import fp_pkg::*;
  import fv_pkg::*;
  import fv_ref_pkg::*;

  localparam int DEPTH = 64;
  localparam int HALF  = DEPTH / 2;
  localparam int REACH = HALF - 2;
  localparam real DT   = 2.0e-3;

  logic clk = 1'b0, rst_n = 1'b1;
  // reset falls before the first clock edge, so every flop starts reset
  initial #2 rst_n = 1'b0;
  logic start = 1'b0;
  logic [IDX_W-1:0] num_nodes = '0;
  logic busy, done, miss_err, row_err;
  logic node_valid, node_ready;
  node_in_t node_data;
  logic face_valid, face_ready;
  face_desc_t face_data;
  logic res_valid, res_ready = 1'b1;
  state_t res_data;
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  fv_processor #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .start, .num_nodes, .dt(b(DT)),
    .busy, .done, .miss_err, .row_err, .node_valid, .node_ready, .node_data,
    .face_valid, .face_ready, .face_data, .res_valid, .res_ready, .res_data);

  node_in_t   nodes [$];
  face_desc_t faces [$];
  rstate_t    expq  [$];
  int gap_pct = 0, bp_pct = 0;
  bit check_values = 1'b1;
  int nres = 0, first_res = 0, last_res = 0;

  // Build a random mesh of n nodes; a fraction are ghosts.
  task automatic build(input int n, input int reach, input bit ghosts, input bit bad);
    rstate_t st [];
    real ar [];
    bit  ex [];
    st = new[n]; ar = new[n]; ex = new[n];
    nodes.delete(); faces.delete(); expq.delete();
    for (int i = 0; i < n; i++) begin
      st[i] = rand_state();
      ar[i] = urand(0.01, 0.1);
      ex[i] = !(ghosts && $urandom_range(4) == 0);
      nodes.push_back('{ex: ex[i], u: to_b(st[i]), area: b(ar[i])});
    end
    for (int i = 0; i < n; i++) begin
      if (ex[i]) begin
        rstate_t sum;
        sum = '{0.0, 0.0, 0.0, 0.0};
        for (int f = 0; f < 3; f++) begin
          int j;
          real th, len;
          rstate_t fl;
          do j = i - reach + int'($urandom_range(2 * reach));
          while (j < 0 || j >= n || j == i);
          if (bad && i == n / 2 && f == 1) j = (i + REACH + 3 < n) ? i + REACH + 3 : 0;
          th = urand(0.0, 6.2831853);
          len = urand(0.1, 1.0);
          fl = face_flux(st[i], st[j], $cos(th), $sin(th), len);
          sum.rho += fl.rho; sum.mu += fl.mu; sum.mv += fl.mv; sum.e += fl.e;
          faces.push_back('{last: (f == 2), idx: IDX_W'(j), nx: b($cos(th)), ny: b($sin(th)), len: b(len)});
        end
        expq.push_back('{st[i].rho - DT / ar[i] * sum.rho, st[i].mu - DT / ar[i] * sum.mu,
                         st[i].mv - DT / ar[i] * sum.mv, st[i].e - DT / ar[i] * sum.e});
      end
    end
  endtask

  // stream drivers
  // A word accepted at a rising edge leaves the queue at the next falling
  // edge, so the design always samples a stable word.
  logic n_acc = 1'b0, f_acc = 1'b0;
  always @(posedge clk) begin
    n_acc <= node_valid && node_ready;
    f_acc <= face_valid && face_ready;
  end
  always @(negedge clk) begin
    if (n_acc) void'(nodes.pop_front());
    if (f_acc) void'(faces.pop_front());
  end
  always_comb begin
    node_data = (nodes.size() > 0) ? nodes[0] : '0;
    face_data = (faces.size() > 0) ? faces[0] : '0;
  end
  logic nv_en = 1'b0, fv_en = 1'b0;
  always @(posedge clk) begin
    nv_en <= ($urandom_range(99) >= gap_pct);
    fv_en <= ($urandom_range(99) >= gap_pct);
    res_ready <= ($urandom_range(99) >= bp_pct);
  end
  assign node_valid = nv_en && nodes.size() > 0;
  assign face_valid = fv_en && faces.size() > 0;

  // result checker
  always @(posedge clk) begin
    if (rst_n && res_valid && res_ready) begin
      rstate_t g, e;
      g = to_r(res_data);
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL extra result");
      end else begin
        e = expq.pop_front();
        if (check_values && !(close(g.rho, e.rho, 1.0) && close(g.mu, e.mu, 1.0) &&
              close(g.mv, e.mv, 1.0) && close(g.e, e.e, 1.0))) begin
          failures++;
          if (failures < 10) $display("FAIL result %0d got %g %g %g %g exp %g %g %g %g", nres,
                                      g.rho, g.mu, g.mv, g.e, e.rho, e.mu, e.mv, e.e);
        end
      end
      if (nres == 0) first_res = cyc;
      last_res = cyc;
      nres++;
    end
  end

  task automatic run(input int n);
    nres = 0;
    num_nodes <= IDX_W'(n);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    // 1: gaps, back-pressure, ghosts, wrapping buffer
    gap_pct = 20; bp_pct = 20;
    build(400, REACH, 1'b1, 1'b0);
    run(400);
    checks++; if (expq.size() != 0 || miss_err || row_err) begin failures++; $display("FAIL run1 left=%0d miss=%b row=%b", expq.size(), miss_err, row_err); end
    // 2: continuous streams: one node per three cycles
    gap_pct = 0; bp_pct = 0;
    build(300, REACH, 1'b0, 1'b0);
    run(300);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL run2 left"); end
    checks++;
    if (last_res - first_res != 3 * (300 - 1)) begin
      failures++; $display("FAIL rate: %0d results in %0d cycles", nres, last_res - first_res);
    end
    // 3: a stream shorter than half the buffer
    build(20, 5, 1'b0, 1'b0);
    run(20);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL run3 left"); end
    // 4: a neighbour outside the window must be flagged
    check_values = 1'b0;
    build(200, 8, 1'b0, 1'b1);
    run(200);
    checks++; if (!miss_err) begin failures++; $display("FAIL miss not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
