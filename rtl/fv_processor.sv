// fv_processor: one processing element of the unstructured finite volume
// accelerator. It streams the node array and the face-descriptor array of a
// renumbered mesh from off-chip memory, keeps a sliding window of nodes in
// the Memory unit, and produces one updated node state every three cycles.
//
// Structure (after the block diagram of the architecture):
//   node stream -> input FIFO -> prim_unit (p, c) -> FIFO -> Memory unit DIA
//   face stream -> input FIFO -> Local address generator -> Node AddressB
//   Memory unit DOB -> Neighborhood memory      (loader, runs one node ahead)
//   Memory unit DOA -> Current node register    (Node AddressA)
//   Current node + Neighborhood memory -> arith_unit -> result FIFO
//
// Sequencing. The Memory unit is a circular buffer of DEPTH nodes; stream
// position k sits at address k mod DEPTH. At start the writer loads nodes
// until about half the buffer is full. A neighbour may lie up to REACH =
// DEPTH/2 - 2 positions before or after the node being updated. The loader
// fetches the neighbours of node j once node j+REACH is on chip (or the
// whole stream is); the writer loads node k only while k < i + DEPTH - REACH,
// where i is the next node the issue stage will update, so node i-REACH and
// everything after it stay on chip. The loader can thus run three nodes ahead
// of the issue stage. The host's numbering must keep the serial bandwidth of
// the mesh within REACH (the local address generator flags a neighbour
// outside it).
// Port A is shared: the issue stage's read of the current node has priority,
// and a loaded node is written in a cycle in which port A is free, which in
// steady state is two of every three cycles.
// Nodes whose ex bit is 0 are loaded (they are neighbours) but not updated
// and yield no result; this supports access patterns in which a node is
// loaded several times but updated once.
//
// Interface: pulse start with num_nodes (length of the node stream) and dt
// held stable; busy stays high until the last result has left res_*. Each
// node with ex = 1 needs exactly three face descriptors, in stream order,
// the third with its next-node bit set. All streams are valid/ready.
// Timing: with streams never empty and res_ready high, one face enters the
// arithmetic unit every cycle, i.e. one node every three cycles; the first
// result appears about HALF cycles after start (the prefill).
//
// Sequencing follows the paper's description; the FIFO depths, the credit
// scheme that keeps the pipelines stall-free, and the ex bit's hardware
// handling are this design's choices.
module fv_processor
  import fp_pkg::*;
  import fv_pkg::*;
#(
  parameter int unsigned DEPTH     = 38912,
  parameter int unsigned NBH_DEPTH = 64,
  parameter int unsigned IN_FIFO   = 16,
  parameter int unsigned OUT_FIFO  = 16,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // control
  input  logic             start,
  input  logic [IDX_W-1:0] num_nodes,
  input  fp_t              dt,
  output logic             busy,
  output logic             done,
  output logic             miss_err,
  output logic             row_err,
  // node data stream
  input  logic             node_valid,
  output logic             node_ready,
  input  node_in_t         node_data,
  // face descriptor stream
  input  logic             face_valid,
  output logic             face_ready,
  input  face_desc_t       face_data,
  // updated node data stream
  output logic             res_valid,
  input  logic             res_ready,
  output state_t           res_data
);

  localparam int unsigned HALF  = DEPTH / 2;
  // Largest neighbour distance served, kept LEAD below half the buffer so
  // that the loader can run up to 2*LEAD-1 nodes ahead of the issue stage.
  localparam int unsigned LEAD  = 2;
  localparam int unsigned REACH = HALF - LEAD;
  localparam int unsigned NAW  = $clog2(NBH_DEPTH);
  localparam int unsigned CW   = IDX_W + 1;     // stream counters
  localparam int unsigned PRIM_LAT = 9;

  typedef logic [CW-1:0] cnt_t;

  function automatic logic [AW-1:0] wrap_inc(input logic [AW-1:0] a);
    return (a == AW'(DEPTH - 1)) ? '0 : a + 1'b1;
  endfunction

  logic run;
  cnt_t n_total;
  fp_t  dt_q;

  // ------------------------------------------------------- input buffers
  logic     nf_valid, nf_ready;
  node_in_t nf_data;
  logic [$clog2(IN_FIFO+1)-1:0] nf_count;
  sync_fifo #(.W($bits(node_in_t)), .DEPTH(IN_FIFO)) u_node_fifo (
    .clk, .rst_n, .in_valid(node_valid), .in_ready(node_ready), .in_data(node_data),
    .out_valid(nf_valid), .out_ready(nf_ready), .out_data(nf_data), .count(nf_count));

  logic       ff_valid, ff_ready;
  face_desc_t ff_data;
  logic [$clog2(IN_FIFO+1)-1:0] ff_count;
  sync_fifo #(.W($bits(face_desc_t)), .DEPTH(IN_FIFO)) u_face_fifo (
    .clk, .rst_n, .in_valid(face_valid), .in_ready(face_ready), .in_data(face_data),
    .out_valid(ff_valid), .out_ready(ff_ready), .out_data(ff_data), .count(ff_count));

  // --------------------------------------- p and c of each incoming node
  localparam int unsigned PF_DEPTH = PRIM_LAT + 4;
  logic      prim_in, prim_out_v, prim_out_ex;
  node_rec_t prim_out_rec;
  logic [$clog2(PF_DEPTH+1)-1:0] prim_cnt;   // nodes in prim_unit or its FIFO
  logic      pf_valid, pf_ready;
  logic [$bits(node_rec_t):0] pf_data;
  logic [$clog2(PF_DEPTH+1)-1:0] pf_count;
  cnt_t      admitted;                       // nodes taken from the node FIFO

  assign prim_in  = run && nf_valid && (32'(prim_cnt) < PF_DEPTH) && (admitted < n_total);
  assign nf_ready = prim_in;

  prim_unit u_prim (.clk, .rst_n, .in_valid(prim_in), .in_node(nf_data),
                    .out_valid(prim_out_v), .out_ex(prim_out_ex), .out_rec(prim_out_rec));

  logic pf_in_ready;  // always 1 when written: prim_cnt reserves the space
  sync_fifo #(.W($bits(node_rec_t) + 1), .DEPTH(PF_DEPTH)) u_prim_fifo (
    .clk, .rst_n, .in_valid(prim_out_v), .in_ready(pf_in_ready), .in_data({prim_out_ex, prim_out_rec}),
    .out_valid(pf_valid), .out_ready(pf_ready), .out_data(pf_data), .count(pf_count));

  // ------------------------------------------------------------ counters
  cnt_t          loaded;      // nodes written to the Memory unit (Write Address)
  logic [AW-1:0] wr_addr;
  cnt_t          lp;          // loader: node whose neighbours are fetched
  logic [AW-1:0] lp_addr;
  logic [1:0]    lk;          // loader: face of node lp
  cnt_t          ip;          // issue: next node to update (Node AddressA)
  logic [AW-1:0] ip_addr;

  // ex bits of the nodes on chip, beside the Memory unit
  logic ex_flags [DEPTH];

  // -------------------------------------------------- Memory unit ports
  logic          issue_rd;     // port A read of the current node this cycle
  logic          wr_go;        // port A write of a loaded node this cycle
  logic          mem_en_a, mem_we_a, mem_en_b;
  logic [AW-1:0] mem_addr_a, mem_addr_b;
  node_rec_t     dout_a, dout_b;

  assign wr_go = run && pf_valid && !issue_rd && (loaded < n_total) &&
                 (loaded < ip + cnt_t'(DEPTH - REACH));
  assign pf_ready   = wr_go;
  assign mem_en_a   = issue_rd || wr_go;
  assign mem_we_a   = wr_go;
  assign mem_addr_a = issue_rd ? ip_addr : wr_addr;

  memory_unit #(.W($bits(node_rec_t)), .DEPTH(DEPTH)) u_mem (
    .clk, .en_a(mem_en_a), .we_a(mem_we_a), .addr_a(mem_addr_a),
    .din_a(pf_data[$bits(node_rec_t)-1:0]), .dout_a(dout_a),
    .en_b(mem_en_b), .addr_b(mem_addr_b), .dout_b(dout_b));

  always_ff @(posedge clk) begin
    if (wr_go) ex_flags[wr_addr] <= pf_data[$bits(node_rec_t)];
  end

  // --------------------------------------------------------------- loader
  logic [NAW:0] nbh_alloc;     // entries allocated and not yet consumed
  logic         ld_node_ok, ld_ex, ld_skip, ld_pop;
  logic         lag_v, lag_end, lag_miss;
  logic [1:0]   lag_slot;
  logic [AW-1:0] lag_addr;

  assign ld_node_ok = run && (lp < n_total) && (loaded > lp) &&
                      ((loaded > lp + cnt_t'(REACH)) || (loaded == n_total));
  assign ld_ex      = ex_flags[lp_addr];
  assign ld_skip    = ld_node_ok && !ld_ex;
  assign ld_pop     = ld_node_ok && ld_ex && ff_valid && (32'(nbh_alloc) < NBH_DEPTH);
  assign ff_ready   = ld_pop;

  local_addr_gen #(.DEPTH(DEPTH), .REACH(REACH)) u_lag (
    .clk, .rst_n, .in_valid(ld_pop), .idx(ff_data.idx), .last(ff_data.last),
    .cur_pos(lp[IDX_W-1:0]), .cur_addr(lp_addr),
    .out_valid(lag_v), .addr_b(lag_addr), .slot(lag_slot), .row_end(lag_end), .miss(lag_miss));

  assign mem_en_b   = lag_v;
  assign mem_addr_b = lag_addr;

  // face geometry waits for the neighbour record (2 cycles)
  typedef struct packed {
    logic v;
    fp_t  nx, ny, len;
  } geo_t;
  geo_t geo_in, geo_q;
  assign geo_in = '{v: ld_pop, nx: ff_data.nx, ny: ff_data.ny, len: ff_data.len};
  delay_line #(.W($bits(geo_t)), .N(2)) d_geo (.clk, .d(geo_in), .q(geo_q));
  logic geo_v_q;  // reset-safe valid
  logic lag_v_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lag_v_q <= 1'b0;
    else        lag_v_q <= lag_v;
  end
  assign geo_v_q = lag_v_q && geo_q.v;

  // ---------------------------------------------------- Neighborhood memory
  logic [NAW-1:0] nbh_wp, nbh_rp;
  logic [NAW:0]   nbh_ready_cnt;   // entries written and not yet reserved
  nbh_entry_t     nbh_w, nbh_r [1];
  logic [NAW-1:0] nbh_raddr [1];

  assign nbh_w = '{nb: dout_b, nx: geo_q.nx, ny: geo_q.ny, len: geo_q.len};
  assign nbh_raddr[0] = nbh_rp;

  neighborhood_mem #(.W($bits(nbh_entry_t)), .DEPTH(NBH_DEPTH), .NRD(1)) u_nbh (
    .clk, .we(geo_v_q), .waddr(nbh_wp), .wdata(nbh_w), .raddr(nbh_raddr), .rdata(nbh_r));

  // ----------------------------------------------------------------- issue
  logic [1:0] fq;          // faces of the current node still to issue
  logic       r1;          // current node read is returning this cycle
  logic [$clog2(OUT_FIFO+1):0] out_cnt;   // nodes issued, result not yet taken
  logic       face_go, iss_skip, iss_ex;
  node_rec_t  cur_reg;     // Current node register
  logic [1:0] face_slot;
  logic       res_push, res_pop;

  assign iss_ex   = ex_flags[ip_addr];
  assign issue_rd = run && (ip < n_total) && (lp > ip) && iss_ex && !r1 && (fq != 2'd3) &&
                    (nbh_ready_cnt >= (NAW+1)'(FACES)) && (32'(out_cnt) < OUT_FIFO);
  assign iss_skip = run && (ip < n_total) && (lp > ip) && !iss_ex;
  assign face_go  = (fq != 2'd0);
  assign face_slot = 2'd3 - fq;

  state_t res_data_in;
  logic [$clog2(OUT_FIFO+1)-1:0] res_count;
  logic res_in_ready;

  arith_unit u_arith (
    .clk, .rst_n, .dt(dt_q), .in_valid(face_go), .in_slot(face_slot),
    .in_cur(cur_reg), .in_nb(nbh_r[0].nb), .in_nx(nbh_r[0].nx), .in_ny(nbh_r[0].ny),
    .in_len(nbh_r[0].len), .out_valid(res_push), .out_state(res_data_in));
  sync_fifo #(.W($bits(state_t)), .DEPTH(OUT_FIFO)) u_res_fifo (
    .clk, .rst_n, .in_valid(res_push), .in_ready(res_in_ready), .in_data(res_data_in),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data), .count(res_count));
  assign res_pop = res_valid && res_ready;

  // --------------------------------------------------------- state update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0; n_total <= '0; dt_q <= '0;
      admitted <= '0; prim_cnt <= '0;
      loaded <= '0; wr_addr <= '0;
      lp <= '0; lp_addr <= '0; lk <= '0;
      ip <= '0; ip_addr <= '0;
      nbh_alloc <= '0; nbh_wp <= '0; nbh_rp <= '0; nbh_ready_cnt <= '0;
      fq <= '0; r1 <= 1'b0; out_cnt <= '0;
      miss_err <= 1'b0; row_err <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run <= 1'b1; n_total <= {1'b0, num_nodes}; dt_q <= dt;
        admitted <= '0; loaded <= '0; wr_addr <= '0;
        lp <= '0; lp_addr <= '0; lk <= '0;
        ip <= '0; ip_addr <= '0;
        miss_err <= 1'b0; row_err <= 1'b0;
      end
      if (run && ip == n_total && lp == n_total && out_cnt == '0 && fq == '0 && !r1) begin
        run  <= 1'b0;
        done <= 1'b1;
      end
      // prim_unit admission
      if (prim_in) admitted <= admitted + 1'b1;
      prim_cnt <= prim_cnt + $bits(prim_cnt)'(prim_in) - $bits(prim_cnt)'(wr_go);
      // Memory unit writes
      if (wr_go) begin
        loaded  <= loaded + 1'b1;
        wr_addr <= wrap_inc(wr_addr);
      end
      // loader
      if (ld_skip) begin
        lp <= lp + 1'b1; lp_addr <= wrap_inc(lp_addr);
      end else if (ld_pop) begin
        if (lk == 2'(FACES - 1)) begin
          lk <= '0; lp <= lp + 1'b1; lp_addr <= wrap_inc(lp_addr);
        end else begin
          lk <= lk + 1'b1;
        end
      end
      // descriptor checks: neighbour on chip, next-node bit on face 3 only
      if (lag_v && lag_miss) miss_err <= 1'b1;
      if (lag_v && ((lag_slot == 2'(FACES - 1)) != lag_end)) row_err <= 1'b1;
      if (geo_v_q) nbh_wp <= nbh_wp + 1'b1;
      nbh_alloc <= nbh_alloc + (NAW+1)'(ld_pop) - (NAW+1)'(face_go);
      nbh_ready_cnt <= nbh_ready_cnt + (NAW+1)'(geo_v_q) - (issue_rd ? (NAW+1)'(FACES) : '0);
      // issue
      if (issue_rd || iss_skip) begin
        ip <= ip + 1'b1; ip_addr <= wrap_inc(ip_addr);
      end
      r1 <= issue_rd;
      if (r1)           fq <= 2'(FACES);
      else if (face_go) fq <= fq - 1'b1;
      if (face_go) nbh_rp <= nbh_rp + 1'b1;
      out_cnt <= out_cnt + ($clog2(OUT_FIFO+1)+1)'(issue_rd) - ($clog2(OUT_FIFO+1)+1)'(res_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (r1) cur_reg <= dout_a;
  end

  assign busy = run;

  // The credit scheme never lets the result FIFO overflow.
  a_res_room: assert property (@(posedge clk) disable iff (!rst_n) res_push |-> res_in_ready);
  // A face is never issued from an empty neighbourhood slot.
  a_prim_room: assert property (@(posedge clk) disable iff (!rst_n) prim_out_v |-> pf_in_ready);
  a_nbh_bound: assert property (@(posedge clk) disable iff (!rst_n) 32'(nbh_alloc) <= NBH_DEPTH);

endmodule
