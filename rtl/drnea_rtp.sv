// drnea_rtp: Delta-RNEA Round-Trip Pipeline for an NB-link serial chain.
//
// Same organisation as the RNEA pipeline: forward submodules D_f[0..NB-1]
// pass {v, a, dv, da} down the chain, each hands {sin, cos, tau, f, df} to its
// backward submodule D_b through a link FIFO, and D_b[NB-1..0] pass the lazy
// addends back. Inputs are the per-link results of the RNEA pipeline
// (q, sin, cos, qd, tau, v, a, total f, dmode); the outputs are tau and the
// row i of d tau / d[q; qd] for every link i. With dmode = 0 the array is in
// data-pass mode: tau is forwarded and the derivative outputs are zero.
//
// Per-link input skew FIFOs and output FIFOs let a whole task enter and
// leave in one handshake each (see rnea_rtp). Throughput one task per
// cycle, latency about 2*NB + 4 cycles.
module drnea_rtp
  import rbd_pkg::*;
#(
  parameter int NB = 7,
  parameter int FIFO_DEPTH = 2 * NB + 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  rnea_out_t       in_data  [NB],
  output logic            out_valid,
  input  logic            out_ready,
  output fx_t             out_tau  [NB],
  output fx_t [2*NB-1:0]  out_dtau [NB]
);
  typedef struct packed {
    logic dmode;
    fx_t  s, c, tau;
    sv6_t f;
    sv6_t [2*NB-1:0] df;
  } dtr_t;
  typedef struct packed {
    fx_t tau;
    fx_t [2*NB-1:0] dtau;
  } res_t;

  logic            sk_ready [NB], sk_valid [NB], sk_pop [NB];
  rnea_out_t       sk_data  [NB];
  logic            fv [NB+1], fr [NB+1];
  sv6_t            f_v [NB+1], f_a [NB+1];
  sv6_t [2*NB-1:0] f_dv [NB+1], f_da [NB+1];
  logic            dv_ [NB], dr_ [NB], qv [NB], qr [NB];
  dtr_t            dd [NB], qd_ [NB];
  logic            bv [NB+1], br [NB+1];
  sv6_t [2*NB-1:0] bd [NB+1];
  logic            ov [NB], or_ [NB], oqv [NB], oqr [NB];
  res_t            od [NB], oqd [NB];

  always_comb begin
    in_ready  = 1'b1;
    out_valid = 1'b1;
    for (int i = 0; i < NB; i++) begin
      in_ready  = in_ready  && sk_ready[i];
      out_valid = out_valid && oqv[i];
    end
  end

  // base: v_0 = 0, a_0 = -gravity, no derivatives
  assign fv[0]   = 1'b1;
  assign f_v[0]  = '0;
  always_comb begin
    f_a[0]    = '0;
    f_a[0][5] = GRAV;
  end
  assign f_dv[0] = '0;
  assign f_da[0] = '0;
  assign fr[NB]  = 1'b1;
  assign bv[NB]  = 1'b1;
  assign bd[NB]  = '0;
  assign br[0]   = 1'b1;

  for (genvar i = 0; i < NB; i++) begin : g_link
    stream_fifo #(.T(rnea_out_t), .DEPTH(FIFO_DEPTH)) u_skew (
      .clk, .rst_n,
      .in_valid (in_valid && in_ready), .in_ready(sk_ready[i]), .in_data(in_data[i]),
      .out_valid(sk_valid[i]), .out_ready(sk_pop[i]), .out_data(sk_data[i]));

    drnea_fwd #(.NB(NB), .LINK(i)) u_f (
      .clk, .rst_n,
      .in_valid(sk_valid[i]), .in_ready(sk_pop[i]), .in_data(sk_data[i]),
      .ftr_in_valid(fv[i]), .ftr_in_ready(fr[i]),
      .ftr_in_v(f_v[i]), .ftr_in_a(f_a[i]), .ftr_in_dv(f_dv[i]), .ftr_in_da(f_da[i]),
      .ftr_out_valid(fv[i+1]), .ftr_out_ready(fr[i+1]),
      .ftr_out_v(f_v[i+1]), .ftr_out_a(f_a[i+1]), .ftr_out_dv(f_dv[i+1]), .ftr_out_da(f_da[i+1]),
      .dtr_valid(dv_[i]), .dtr_ready(dr_[i]),
      .dtr_dmode(dd[i].dmode), .dtr_s(dd[i].s), .dtr_c(dd[i].c), .dtr_tau(dd[i].tau),
      .dtr_f(dd[i].f), .dtr_df(dd[i].df));

    stream_fifo #(.T(dtr_t), .DEPTH(FIFO_DEPTH)) u_down (
      .clk, .rst_n,
      .in_valid (dv_[i]), .in_ready (dr_[i]), .in_data (dd[i]),
      .out_valid(qv[i]),  .out_ready(qr[i]),  .out_data(qd_[i]));

    drnea_bwd #(.NB(NB), .LINK(i)) u_b (
      .clk, .rst_n,
      .dtr_valid(qv[i]), .dtr_ready(qr[i]),
      .dtr_dmode(qd_[i].dmode), .dtr_s(qd_[i].s), .dtr_c(qd_[i].c), .dtr_tau(qd_[i].tau),
      .dtr_f(qd_[i].f), .dtr_df(qd_[i].df),
      .btr_in_valid(bv[i+1]), .btr_in_ready(br[i+1]), .btr_in(bd[i+1]),
      .btr_out_valid(bv[i]), .btr_out_ready(br[i]), .btr_out(bd[i]),
      .out_valid(ov[i]), .out_ready(or_[i]), .out_tau(od[i].tau), .out_dtau(od[i].dtau));

    stream_fifo #(.T(res_t), .DEPTH(FIFO_DEPTH)) u_out (
      .clk, .rst_n,
      .in_valid (ov[i]),  .in_ready (or_[i]), .in_data (od[i]),
      .out_valid(oqv[i]), .out_ready(oqr[i]), .out_data(oqd[i]));
    assign oqr[i]      = out_valid && out_ready;
    assign out_tau[i]  = oqd[i].tau;
    assign out_dtau[i] = oqd[i].dtau;
  end
endmodule
