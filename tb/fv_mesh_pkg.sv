// fv_mesh_pkg: builds the streams for a structured triangular test mesh,
// numbered for a small serial bandwidth, together with the expected result
// of one time step.
//
// The domain is GX x GY squares of side H, each cut along its rising
// diagonal into a lower-right triangle (t = 0) and an upper-left triangle
// (t = 1). Triangle (i, j, t) has stream index 2*(j*GX + i) + t, so a
// neighbour is at most 2*GX + 1 positions away. The outer ring of squares
// holds ghost cells (ex = 0) that are loaded as neighbours but not updated,
// the way boundary conditions are supplied. Faces of t = 0: bottom, right,
// diagonal; of t = 1: top, left, diagonal; normals point out of the cell.
package fv_mesh_pkg;
  import fp_pkg::*;
  import fv_pkg::*;
  import fv_ref_pkg::*;

  localparam real H  = 0.01;
  localparam real S2 = 0.70710678118654752;

  // uniform: every cell in the same state (the update must leave it alone)
  // bad_at:  if >= 0, the first face of that update gets an index outside
  //          the window and the row's next-node bit is misplaced
  task automatic build_grid(input int gx, input int gy, input bit uniform, input real dt,
                            input int bad_at, input int reach,
                            ref node_in_t nodes[$], ref face_desc_t faces[$],
                            ref rstate_t expq[$]);
    int n;
    rstate_t st [];
    rstate_t base;
    int upd;
    n = 2 * gx * gy;
    st = new[n];
    base = rand_state();
    nodes.delete(); faces.delete(); expq.delete();
    for (int k = 0; k < n; k++) begin
      int i, j;
      bit ex;
      i = (k / 2) % gx;
      j = (k / 2) / gx;
      ex = (i > 0 && i < gx - 1 && j > 0 && j < gy - 1);
      st[k] = uniform ? base : rand_state();
      nodes.push_back('{ex: ex, u: to_b(st[k]), area: b(H * H / 2.0)});
    end
    upd = 0;
    for (int k = 0; k < n; k++) begin
      int i, j, t;
      int nb [3];
      real nxv [3], nyv [3], lv [3];
      rstate_t sum;
      i = (k / 2) % gx;
      j = (k / 2) / gx;
      t = k % 2;
      if (!(i > 0 && i < gx - 1 && j > 0 && j < gy - 1)) continue;
      if (t == 0) begin
        nb[0] = 2 * ((j - 1) * gx + i) + 1;  nxv[0] = 0.0;  nyv[0] = -1.0; lv[0] = H;
        nb[1] = 2 * (j * gx + i + 1) + 1;    nxv[1] = 1.0;  nyv[1] = 0.0;  lv[1] = H;
        nb[2] = k + 1;                        nxv[2] = -S2;  nyv[2] = S2;   lv[2] = H / S2;
      end else begin
        nb[0] = 2 * ((j + 1) * gx + i);      nxv[0] = 0.0;  nyv[0] = 1.0;  lv[0] = H;
        nb[1] = 2 * (j * gx + i - 1);        nxv[1] = -1.0; nyv[1] = 0.0;  lv[1] = H;
        nb[2] = k - 1;                        nxv[2] = S2;   nyv[2] = -S2;  lv[2] = H / S2;
      end
      sum = '{0.0, 0.0, 0.0, 0.0};
      for (int f = 0; f < 3; f++) begin
        rstate_t fl;
        int idx;
        bit lastb;
        fl = face_flux(st[k], st[nb[f]], nxv[f], nyv[f], lv[f]);
        sum.rho += fl.rho; sum.mu += fl.mu; sum.mv += fl.mv; sum.e += fl.e;
        idx = nb[f];
        lastb = (f == 2);
        if (upd == bad_at && f == 0) begin
          idx = k + reach + 1;
          lastb = 1'b1;
        end
        if (upd == bad_at && f == 2) lastb = 1'b0;
        faces.push_back('{last: lastb, idx: IDX_W'(idx), nx: b(nxv[f]), ny: b(nyv[f]), len: b(lv[f])});
      end
      expq.push_back('{st[k].rho - dt / (H * H / 2.0) * sum.rho,
                       st[k].mu  - dt / (H * H / 2.0) * sum.mu,
                       st[k].mv  - dt / (H * H / 2.0) * sum.mv,
                       st[k].e   - dt / (H * H / 2.0) * sum.e});
      upd++;
    end
  endtask

endpackage
