// drnea_fwd: forward submodule D_f of the Delta-RNEA round-trip pipeline for
// link LINK (0-based) of an NB-link chain.
//
// It propagates the partial derivatives of v, a and f with respect to
// u = [q; qd] (2*NB columns: column j < NB is d/dq_j, column NB+j is d/dqd_j):
//     dv  = X dv_p + [j = i] (d/dq: -S x (X v_p),  d/dqd: S)
//     da  = X da_p + dv x S qd_i + [j = i] (d/dq: -S x (X a_p),  d/dqd: v x S)
//     df  = I da + dv x* I v + v x* I dv
// where v, a (link i) and v_p, a_p (its parent) come from the RNEA pipeline.
// Incremental column vectors: columns of joints deeper than LINK are zero at
// this link, so they are neither computed nor carried; they are constant
// zeros that synthesis removes, and the work grows with LINK as in the paper.
// In pass mode (dmode = 0, ID-only tasks) the derivative words carry no
// meaning and only tau and f travel on.
//
// Outputs: ftr = {v, a, dv, da} to D_f[LINK+1]; dtr = {sin, cos, tau, f,
// df} to D_b[LINK] through the link FIFO. One register stage, one task per
// cycle, same join/fork handshake as the RNEA submodules.
module drnea_fwd
  import rbd_pkg::*;
#(
  parameter int NB   = 7,
  parameter int LINK = 0
) (
  input  logic clk,
  input  logic rst_n,
  // input_i: RNEA result of this link
  input  logic      in_valid,
  output logic      in_ready,
  input  rnea_out_t in_data,
  // ftr from the parent
  input  logic              ftr_in_valid,
  output logic              ftr_in_ready,
  input  sv6_t              ftr_in_v,
  input  sv6_t              ftr_in_a,
  input  sv6_t [2*NB-1:0]   ftr_in_dv,
  input  sv6_t [2*NB-1:0]   ftr_in_da,
  // ftr to the child
  output logic              ftr_out_valid,
  input  logic              ftr_out_ready,
  output sv6_t              ftr_out_v,
  output sv6_t              ftr_out_a,
  output sv6_t [2*NB-1:0]   ftr_out_dv,
  output sv6_t [2*NB-1:0]   ftr_out_da,
  // dtr to D_b
  output logic              dtr_valid,
  input  logic              dtr_ready,
  output logic              dtr_dmode,
  output fx_t               dtr_s,
  output fx_t               dtr_c,
  output fx_t               dtr_tau,
  output sv6_t              dtr_f,
  output sv6_t [2*NB-1:0]   dtr_df
);
  sv6_t [2*NB-1:0] dv_n, da_n, df_n;

  always_comb begin
    sv6_t iv, xvp, xap, idv;
    fx_t  s, c;
    s   = in_data.s;
    c   = in_data.c;
    iv  = i_mul(LINK, in_data.v);
    xvp = x_mul(LINK, s, c, ftr_in_v);
    xap = x_mul(LINK, s, c, ftr_in_a);
    idv = '0;
    for (int col = 0; col < 2 * NB; col++) begin
      int  jj;
      bit  is_qd;
      jj    = col % NB;
      is_qd = (col >= NB);
      dv_n[col] = '0;
      da_n[col] = '0;
      df_n[col] = '0;
      if (jj <= LINK) begin                       // incremental columns
        dv_n[col] = x_mul(LINK, s, c, ftr_in_dv[col]);
        da_n[col] = x_mul(LINK, s, c, ftr_in_da[col]);
        if (jj == LINK) begin
          if (is_qd) begin
            dv_n[col][2] = dv_n[col][2] + FX_ONE_C;
            da_n[col]    = sv_add(da_n[col], crm_s(in_data.v, FX_ONE_C));
          end else begin
            dv_n[col] = sv_add(dv_n[col], neg_s_cross(xvp));
            da_n[col] = sv_add(da_n[col], neg_s_cross(xap));
          end
        end
        da_n[col] = sv_add(da_n[col], crm_s(dv_n[col], in_data.qd));
        idv       = i_mul(LINK, dv_n[col]);
        df_n[col] = sv_add(i_mul(LINK, da_n[col]),
                           sv_add(crf(dv_n[col], iv), crf(in_data.v, idv)));
      end
    end
  end

  wire free_f = !ftr_out_valid || ftr_out_ready;
  wire free_d = !dtr_valid || dtr_ready;
  wire fire   = in_valid && ftr_in_valid && free_f && free_d;
  assign in_ready     = fire;
  assign ftr_in_ready = fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ftr_out_valid <= 1'b0;
      dtr_valid     <= 1'b0;
    end else if (fire) begin
      ftr_out_valid <= 1'b1;
      dtr_valid     <= 1'b1;
    end else begin
      if (ftr_out_ready) ftr_out_valid <= 1'b0;
      if (dtr_ready)     dtr_valid     <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      ftr_out_v  <= in_data.v;
      ftr_out_a  <= in_data.a;
      ftr_out_dv <= in_data.dmode ? dv_n : '0;
      ftr_out_da <= in_data.dmode ? da_n : '0;
      dtr_dmode  <= in_data.dmode;
      dtr_s      <= in_data.s;
      dtr_c      <= in_data.c;
      dtr_tau    <= in_data.tau;
      dtr_f      <= in_data.f;
      dtr_df     <= in_data.dmode ? df_n : '0;
    end
  end
endmodule
