// mminv_bwd: backward submodule M_b of the MMinvGen round-trip pipeline for
// link LINK (0-based) of an NB-link chain; one iteration of the backward
// loop of the paper's MMinvGen algorithm (a CRBA fused with the backward
// sweep of a simplified ABA):
//     IA  = I_i + IA_child                    (lazy update of I^A)
//     U   = IA S   (third column of IA: the "priority vector")
//     D   = S^T U,  Dinv = 1/D                (recip_unit)
//     out_Minv: row[i] = Dinv, row[j>i] = -Dinv S^T F[:,j]
//     out_M   : row[i] = D,    row[j>i] = S^T F[:,j]
//     if the link has a parent (LINK > 0):
//       out_Minv: F[:,j>=i] += U row[j];  IA -= U Dinv U^T
//       out_M   : F[:,i] = U
//       btr_out = { X^T F[:,j>=i],  X^T IA X }  to the parent
// F holds only the columns of the link's subtree (j >= LINK); the others are
// constant zero (incremental columns). dtr = {sin, cos, inv, U, Dinv, row}
// goes down to M_f of the same link.
//
// The paper writes M[i, tree_e(i)] = F_i^T[:, tree_e(i)] S_{tree_e(i)}; with
// F_i[:, j] the 6-vector of column j, the entry used here is S_i^T F_i[:, j],
// which is what the composite-rigid-body algorithm defines.
//
// One register stage with join (input_i, btr_in) and fork (btr_out, dtr);
// one task per cycle.
module mminv_bwd
  import rbd_pkg::*;
#(
  parameter int NB   = 7,
  parameter int LINK = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  fx_t               in_s,
  input  fx_t               in_c,
  input  logic              in_inv,
  input  logic              btr_in_valid,
  output logic              btr_in_ready,
  input  sv6_t [NB-1:0]     btr_in_f,
  input  sm6_t              btr_in_ia,
  output logic              btr_out_valid,
  input  logic              btr_out_ready,
  output sv6_t [NB-1:0]     btr_out_f,
  output sm6_t              btr_out_ia,
  output logic              dtr_valid,
  input  logic              dtr_ready,
  output fx_t               dtr_s,
  output fx_t               dtr_c,
  output logic              dtr_inv,
  output sv6_t              dtr_u,
  output fx_t               dtr_dinv,
  output fx_t  [NB-1:0]     dtr_row
);
  sm6_t            ia;
  sv6_t            u;
  fx_t             d, dinv;
  fx_t  [NB-1:0]   row_n;
  sv6_t [NB-1:0]   fp_n;
  sm6_t            iap_n;

  always_comb begin
    sm6_t I;
    I = link_inertia(LINK);
    for (int cl = 0; cl < 6; cl++)
      for (int r = 0; r < 6; r++) ia[cl][r] = I[cl][r] + btr_in_ia[cl][r];
    u = ia[2];
    d = u[2];
  end

  recip_unit u_recip (.x(d), .y(dinv));

  always_comb begin
    sv6_t [NB-1:0] fn;
    sm6_t          ian;
    sv6_t          ud;
    fn  = '0;
    ud  = '0;
    ian = ia;
    for (int j = 0; j < NB; j++) begin
      row_n[j] = '0;
      if (j == LINK)     row_n[j] = in_inv ? dinv : d;
      else if (j > LINK) row_n[j] = in_inv ? -fx_mul(dinv, btr_in_f[j][2]) : btr_in_f[j][2];
    end
    if (LINK > 0) begin
      for (int j = LINK; j < NB; j++) begin
        if (in_inv)          fn[j] = sv_add(btr_in_f[j], sv_scale(u, row_n[j]));
        else if (j == LINK)  fn[j] = u;
        else                 fn[j] = btr_in_f[j];
      end
      if (in_inv) begin
        ud = sv_scale(u, dinv);
        for (int cl = 0; cl < 6; cl++)
          for (int r = 0; r < 6; r++) ian[cl][r] = ia[cl][r] - fx_mul(ud[r], u[cl]);
      end
    end
    fp_n = '0;
    for (int j = LINK; j < NB; j++) fp_n[j] = xt_mul(LINK, in_s, in_c, fn[j]);
    iap_n = (LINK > 0) ? xt_a_x(LINK, in_s, in_c, ian) : '0;
  end

  wire free_b = !btr_out_valid || btr_out_ready;
  wire free_d = !dtr_valid || dtr_ready;
  wire fire   = in_valid && btr_in_valid && free_b && free_d;
  assign in_ready     = fire;
  assign btr_in_ready = fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      btr_out_valid <= 1'b0;
      dtr_valid     <= 1'b0;
    end else if (fire) begin
      btr_out_valid <= 1'b1;
      dtr_valid     <= 1'b1;
    end else begin
      if (btr_out_ready) btr_out_valid <= 1'b0;
      if (dtr_ready)     dtr_valid     <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      btr_out_f  <= fp_n;
      btr_out_ia <= iap_n;
      dtr_s      <= in_s;
      dtr_c      <= in_c;
      dtr_inv    <= in_inv;
      dtr_u      <= u;
      dtr_dinv   <= dinv;
      dtr_row    <= row_n;
    end
  end
endmodule
