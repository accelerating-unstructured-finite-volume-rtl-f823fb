// arith_unit: the arithmetic unit of the finite volume processor. It takes
// one face of the triangle being updated per clock cycle, evaluates the
// Lax-Friedrichs numerical flux through that face, adds up the three face
// fluxes of the triangle and applies the forward-Euler step
//
//   U_new = U - (dt / V) * sum_f R_f F_f |n_f|
//
// Face flux, in the frame of the face (x along the unit normal (nx, ny)):
//   un = u*nx + v*ny,  ut = -u*ny + v*nx         (rotation into the face)
//   F  = (F(U_L) + F(U_R)) / 2 - a (U_R - U_L) / 2,   a = |u_bar| + c_bar
// with u_bar, c_bar the averages of un and c over the two cells, and
//   F(U) = [rho un, rho un^2 + p, rho un ut, (E + p) un].
// The momentum components are rotated back to x-y and everything is scaled
// by the face length. L is always the triangle being updated, R the
// neighbour across the face.
//
// The flux is a leveled data-flow graph: every operator sits on one of 12
// levels with one register per level, and values that skip levels are
// carried in delay registers (the "D" vertices of the flux graph). After the
// third face, four more levels sum the faces, form dt/V, and update U.
// The equations and the data-flow structure follow the paper; the order of
// operations inside each level, the one-cycle operators and the way the face
// fluxes are collected are this design's choices.
//
// Interface: in_slot numbers the faces of a triangle 0, 1, 2 and they must
// arrive in that order without faces of another triangle in between (gaps
// are allowed). dt is the time step.
// Timing: one face per cycle, so one triangle every three cycles. out_valid
// rises FLUX_LAT + 4 = 16 cycles after the triangle's face 2 entered.
module arith_unit
  import fp_pkg::*;
  import fv_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  fp_t       dt,
  input  logic      in_valid,
  input  logic [1:0] in_slot,
  input  node_rec_t in_cur,
  input  node_rec_t in_nb,
  input  fp_t       in_nx,
  input  fp_t       in_ny,
  input  fp_t       in_len,
  output logic      out_valid,
  output state_t    out_state
);

  localparam int unsigned FLUX_LAT = 12;

  // ---------------------------------------------------------------- levels
  typedef struct packed {
    fp_t uL, vL, uR, vR, rhoL, rhoR, eL, eR, pL, pR, cL, cR, nx, ny, len;
  } s1_t;
  typedef struct packed {
    fp_t a, b, c, d, e, f, g, h, hL, hR, cs, rhoL, rhoR, eL, eR, pL, pR, nx, ny, len;
  } s2_t;
  typedef struct packed {
    fp_t unL, unR, utL, utR, rhoL, rhoR, eL, eR, pL, pR, hL, hR, cs, nx, ny, len;
  } s3_t;
  typedef struct packed {
    fp_t mL, mR, tL, tR, us, ehL, ehR, unL, unR, utL, utR, rhoL, rhoR, eL, eR, pL, pR, cs, nx, ny, len;
  } s4_t;
  typedef struct packed {
    fp_t qL, qR, wL, wR, drho, dm, dt_, de, srho, se, a2, pL, pR, nx, ny, len;
  } s5_t;
  typedef struct packed {
    fp_t smA, smB, sv, adrho, adm, adt, ade, srho, se, nx, ny, len;
  } s6_t;
  typedef struct packed {
    fp_t sm, sv, hrho, hm, ht, he, srho, se, nx, ny, len;
  } s7_t;
  typedef struct packed {
    fp_t grho, gm, gt, ge, nx, ny, len;
  } s8_t;
  typedef struct packed {
    fp_t frho, fm, ft, fe, nx, ny, len;
  } s9_t;
  typedef struct packed {
    fp_t x1, x2, y1, y2, frho, fe, len;
  } s10_t;
  typedef struct packed {
    fp_t frho, fx, fy, fe, len;
  } s11_t;

  s1_t  s1;  s2_t s2;  s3_t s3;  s4_t s4;  s5_t s5;  s6_t s6;
  s7_t  s7;  s8_t s8;  s9_t s9;  s10_t s10; s11_t s11; state_t s12;
  logic [FLUX_LAT:1] v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[FLUX_LAT-1:1], in_valid};
  end

  always_ff @(posedge clk) begin
    // L1: primitive velocities
    s1.uL <= fp_div(in_cur.u.mu, in_cur.u.rho);
    s1.vL <= fp_div(in_cur.u.mv, in_cur.u.rho);
    s1.uR <= fp_div(in_nb.u.mu,  in_nb.u.rho);
    s1.vR <= fp_div(in_nb.u.mv,  in_nb.u.rho);
    s1.rhoL <= in_cur.u.rho;  s1.rhoR <= in_nb.u.rho;
    s1.eL   <= in_cur.u.e;    s1.eR   <= in_nb.u.e;
    s1.pL   <= in_cur.p;      s1.pR   <= in_nb.p;
    s1.cL   <= in_cur.c;      s1.cR   <= in_nb.c;
    s1.nx <= in_nx;  s1.ny <= in_ny;  s1.len <= in_len;
    // L2: products for the rotation, enthalpy-like sums E+p, c_L+c_R
    s2.a <= fp_mul(s1.uL, s1.nx);  s2.b <= fp_mul(s1.vL, s1.ny);
    s2.c <= fp_mul(s1.uR, s1.nx);  s2.d <= fp_mul(s1.vR, s1.ny);
    s2.e <= fp_mul(s1.vL, s1.nx);  s2.f <= fp_mul(s1.uL, s1.ny);
    s2.g <= fp_mul(s1.vR, s1.nx);  s2.h <= fp_mul(s1.uR, s1.ny);
    s2.hL <= fp_add(s1.eL, s1.pL); s2.hR <= fp_add(s1.eR, s1.pR);
    s2.cs <= fp_add(s1.cL, s1.cR);
    s2.rhoL <= s1.rhoL; s2.rhoR <= s1.rhoR; s2.eL <= s1.eL; s2.eR <= s1.eR;
    s2.pL <= s1.pL; s2.pR <= s1.pR; s2.nx <= s1.nx; s2.ny <= s1.ny; s2.len <= s1.len;
    // L3: normal and tangential velocities
    s3.unL <= fp_add(s2.a, s2.b);  s3.unR <= fp_add(s2.c, s2.d);
    s3.utL <= fp_sub(s2.e, s2.f);  s3.utR <= fp_sub(s2.g, s2.h);
    s3.rhoL <= s2.rhoL; s3.rhoR <= s2.rhoR; s3.eL <= s2.eL; s3.eR <= s2.eR;
    s3.pL <= s2.pL; s3.pR <= s2.pR; s3.hL <= s2.hL; s3.hR <= s2.hR; s3.cs <= s2.cs;
    s3.nx <= s2.nx; s3.ny <= s2.ny; s3.len <= s2.len;
    // L4: momenta in the face frame, energy fluxes, sum of normal velocities
    s4.mL  <= fp_mul(s3.rhoL, s3.unL);  s4.mR  <= fp_mul(s3.rhoR, s3.unR);
    s4.tL  <= fp_mul(s3.rhoL, s3.utL);  s4.tR  <= fp_mul(s3.rhoR, s3.utR);
    s4.ehL <= fp_mul(s3.hL, s3.unL);    s4.ehR <= fp_mul(s3.hR, s3.unR);
    s4.us  <= fp_add(s3.unL, s3.unR);
    s4.unL <= s3.unL; s4.unR <= s3.unR; s4.utL <= s3.utL; s4.utR <= s3.utR;
    s4.rhoL <= s3.rhoL; s4.rhoR <= s3.rhoR; s4.eL <= s3.eL; s4.eR <= s3.eR;
    s4.pL <= s3.pL; s4.pR <= s3.pR; s4.cs <= s3.cs;
    s4.nx <= s3.nx; s4.ny <= s3.ny; s4.len <= s3.len;
    // L5: flux products, jumps U_R - U_L, sums, 2a = |unL+unR| + cL+cR
    s5.qL <= fp_mul(s4.mL, s4.unL);  s5.qR <= fp_mul(s4.mR, s4.unR);
    s5.wL <= fp_mul(s4.mL, s4.utL);  s5.wR <= fp_mul(s4.mR, s4.utR);
    s5.drho <= fp_sub(s4.rhoR, s4.rhoL);
    s5.dm   <= fp_sub(s4.mR, s4.mL);
    s5.dt_  <= fp_sub(s4.tR, s4.tL);
    s5.de   <= fp_sub(s4.eR, s4.eL);
    s5.srho <= fp_add(s4.mL, s4.mR);
    s5.se   <= fp_add(s4.ehL, s4.ehR);
    s5.a2   <= fp_add(fp_abs(s4.us), s4.cs);
    s5.pL <= s4.pL; s5.pR <= s4.pR; s5.nx <= s4.nx; s5.ny <= s4.ny; s5.len <= s4.len;
    // L6: pressure terms, tangential momentum flux, dissipation products
    s6.smA <= fp_add(s5.qL, s5.pL);  s6.smB <= fp_add(s5.qR, s5.pR);
    s6.sv  <= fp_add(s5.wL, s5.wR);
    s6.adrho <= fp_mul(s5.a2, s5.drho);  s6.adm <= fp_mul(s5.a2, s5.dm);
    s6.adt   <= fp_mul(s5.a2, s5.dt_);   s6.ade <= fp_mul(s5.a2, s5.de);
    s6.srho <= s5.srho; s6.se <= s5.se; s6.nx <= s5.nx; s6.ny <= s5.ny; s6.len <= s5.len;
    // L7: (2a)*dU/2 = a*dU
    s7.sm   <= fp_add(s6.smA, s6.smB);
    s7.hrho <= fp_half(s6.adrho);  s7.hm <= fp_half(s6.adm);
    s7.ht   <= fp_half(s6.adt);    s7.he <= fp_half(s6.ade);
    s7.sv <= s6.sv; s7.srho <= s6.srho; s7.se <= s6.se;
    s7.nx <= s6.nx; s7.ny <= s6.ny; s7.len <= s6.len;
    // L8: (F_L + F_R) - a*dU
    s8.grho <= fp_sub(s7.srho, s7.hrho);
    s8.gm   <= fp_sub(s7.sm,   s7.hm);
    s8.gt   <= fp_sub(s7.sv,   s7.ht);
    s8.ge   <= fp_sub(s7.se,   s7.he);
    s8.nx <= s7.nx; s8.ny <= s7.ny; s8.len <= s7.len;
    // L9: halve
    s9.frho <= fp_half(s8.grho);  s9.fm <= fp_half(s8.gm);
    s9.ft   <= fp_half(s8.gt);    s9.fe <= fp_half(s8.ge);
    s9.nx <= s8.nx; s9.ny <= s8.ny; s9.len <= s8.len;
    // L10/L11: rotate the momentum flux back to x-y
    s10.x1 <= fp_mul(s9.fm, s9.nx);  s10.x2 <= fp_mul(s9.ft, s9.ny);
    s10.y1 <= fp_mul(s9.fm, s9.ny);  s10.y2 <= fp_mul(s9.ft, s9.nx);
    s10.frho <= s9.frho; s10.fe <= s9.fe; s10.len <= s9.len;
    s11.fx <= fp_sub(s10.x1, s10.x2);
    s11.fy <= fp_add(s10.y1, s10.y2);
    s11.frho <= s10.frho; s11.fe <= s10.fe; s11.len <= s10.len;
    // L12: scale by the face length
    s12.rho <= fp_mul(s11.frho, s11.len);
    s12.mu  <= fp_mul(s11.fx,   s11.len);
    s12.mv  <= fp_mul(s11.fy,   s11.len);
    s12.e   <= fp_mul(s11.fe,   s11.len);
  end

  // ------------------------------------------------ triangle accumulation
  // The face slot and the updated triangle's state and area travel beside
  // the flux graph.
  typedef struct packed {
    logic [1:0] slot;
    state_t     u;
    fp_t        area;
  } side_t;

  side_t side_in, side_q;
  assign side_in = '{slot: in_slot, u: in_cur.u, area: in_cur.area};
  delay_line #(.W($bits(side_t)), .N(FLUX_LAT)) d_side (.clk, .d(side_in), .q(side_q));

  state_t f0, f1;        // fluxes of faces 0 and 1, held until face 2
  state_t a1_s01, a1_f2, a2_sum, a3_prod;
  state_t a1_u, a2_u, a3_u;
  fp_t    a1_k, a2_k;
  logic   a1_v, a2_v, a3_v, a4_v;
  state_t a4_new;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a1_v <= 1'b0; a2_v <= 1'b0; a3_v <= 1'b0; a4_v <= 1'b0;
    end else begin
      a1_v <= v[FLUX_LAT] && side_q.slot == 2'd2;
      a2_v <= a1_v;
      a3_v <= a2_v;
      a4_v <= a3_v;
    end
  end

  always_ff @(posedge clk) begin
    if (v[FLUX_LAT] && side_q.slot == 2'd0) f0 <= s12;
    if (v[FLUX_LAT] && side_q.slot == 2'd1) f1 <= s12;
    // A1: faces 0+1, dt/V
    a1_s01.rho <= fp_add(f0.rho, f1.rho);
    a1_s01.mu  <= fp_add(f0.mu,  f1.mu);
    a1_s01.mv  <= fp_add(f0.mv,  f1.mv);
    a1_s01.e   <= fp_add(f0.e,   f1.e);
    a1_f2 <= s12;
    a1_k  <= fp_div(dt, side_q.area);
    a1_u  <= side_q.u;
    // A2: + face 2
    a2_sum.rho <= fp_add(a1_s01.rho, a1_f2.rho);
    a2_sum.mu  <= fp_add(a1_s01.mu,  a1_f2.mu);
    a2_sum.mv  <= fp_add(a1_s01.mv,  a1_f2.mv);
    a2_sum.e   <= fp_add(a1_s01.e,   a1_f2.e);
    a2_k <= a1_k;
    a2_u <= a1_u;
    // A3: (dt/V) * sum
    a3_prod.rho <= fp_mul(a2_k, a2_sum.rho);
    a3_prod.mu  <= fp_mul(a2_k, a2_sum.mu);
    a3_prod.mv  <= fp_mul(a2_k, a2_sum.mv);
    a3_prod.e   <= fp_mul(a2_k, a2_sum.e);
    a3_u <= a2_u;
    // A4: U - (dt/V) * sum
    a4_new.rho <= fp_sub(a3_u.rho, a3_prod.rho);
    a4_new.mu  <= fp_sub(a3_u.mu,  a3_prod.mu);
    a4_new.mv  <= fp_sub(a3_u.mv,  a3_prod.mv);
    a4_new.e   <= fp_sub(a3_u.e,   a3_prod.e);
  end

  assign out_valid = a4_v;
  assign out_state = a4_new;

endmodule
