// mminv_rtp: MMinvGen Round-Trip Pipeline (the Backward-Forward Module of
// this design) for an NB-link serial chain. It produces either the joint
// space mass matrix M(q) (inv = 0) or its inverse M^-1(q) (inv = 1).
//
// Data flow is the mirror image of the RNEA pipeline: the backward
// submodules M_b[NB-1..0] run first, passing {X^T F, X^T I^A X} toward the
// base, each hands {U, D^-1, partial row} down a link FIFO to its forward
// submodule M_f, and M_f[0..NB-1] pass P toward the tip while finishing the
// rows. Link i outputs row i (entries j >= i) of the upper triangle.
// The base link has no parent, so M_b[0] drops its addend and M_f[0] starts
// from P = 0.
//
// Interface: in_valid/in_ready with q, sin, cos per link and inv;
// out_valid/out_ready with out_row[NB] (row i, columns j >= i valid) and
// out_inv. Input skew and output FIFOs as in rnea_rtp. One task per cycle,
// latency about 2*NB + 4 cycles.
module mminv_rtp
  import rbd_pkg::*;
#(
  parameter int NB = 7,
  parameter int FIFO_DEPTH = 2 * NB + 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t           in_s   [NB],
  input  fx_t           in_c   [NB],
  input  logic          in_inv,
  output logic          out_valid,
  input  logic          out_ready,
  output fx_t [NB-1:0]  out_row [NB],
  output logic          out_inv
);
  typedef struct packed { fx_t s, c; logic inv; } in_t;
  typedef struct packed {
    fx_t s, c; logic inv; sv6_t u; fx_t dinv; fx_t [NB-1:0] row;
  } dtr_t;
  typedef struct packed { logic inv; fx_t [NB-1:0] row; } res_t;

  logic          sk_ready [NB], sk_valid [NB], sk_pop [NB];
  in_t           sk_in [NB], sk_data [NB];
  logic          bv [NB+1], br [NB+1];
  sv6_t [NB-1:0] bf [NB+1];
  sm6_t          bia [NB+1];
  logic          dv_ [NB], dr_ [NB], qv [NB], qr [NB];
  dtr_t          dd [NB], qd_ [NB];
  logic          fv [NB+1], fr [NB+1];
  sv6_t [NB-1:0] fp [NB+1];
  logic          ov [NB], or_ [NB], oqv [NB], oqr [NB];
  res_t          od [NB], oqd [NB];

  always_comb begin
    in_ready  = 1'b1;
    out_valid = 1'b1;
    for (int i = 0; i < NB; i++) begin
      in_ready  = in_ready  && sk_ready[i];
      out_valid = out_valid && oqv[i];
    end
  end
  assign out_inv = oqd[0].inv;

  // tip of the chain: no child addend; base: addend dropped, P_0 = 0
  assign bv[NB]  = 1'b1;
  assign bf[NB]  = '0;
  assign bia[NB] = '0;
  assign br[0]   = 1'b1;
  assign fv[0]   = 1'b1;
  assign fp[0]   = '0;
  assign fr[NB]  = 1'b1;

  for (genvar i = 0; i < NB; i++) begin : g_link
    assign sk_in[i] = '{s: in_s[i], c: in_c[i], inv: in_inv};
    stream_fifo #(.T(in_t), .DEPTH(FIFO_DEPTH)) u_skew (
      .clk, .rst_n,
      .in_valid (in_valid && in_ready), .in_ready(sk_ready[i]), .in_data(sk_in[i]),
      .out_valid(sk_valid[i]), .out_ready(sk_pop[i]), .out_data(sk_data[i]));

    mminv_bwd #(.NB(NB), .LINK(i)) u_b (
      .clk, .rst_n,
      .in_valid(sk_valid[i]), .in_ready(sk_pop[i]),
      .in_s(sk_data[i].s), .in_c(sk_data[i].c), .in_inv(sk_data[i].inv),
      .btr_in_valid(bv[i+1]), .btr_in_ready(br[i+1]), .btr_in_f(bf[i+1]), .btr_in_ia(bia[i+1]),
      .btr_out_valid(bv[i]), .btr_out_ready(br[i]), .btr_out_f(bf[i]), .btr_out_ia(bia[i]),
      .dtr_valid(dv_[i]), .dtr_ready(dr_[i]),
      .dtr_s(dd[i].s), .dtr_c(dd[i].c), .dtr_inv(dd[i].inv), .dtr_u(dd[i].u),
      .dtr_dinv(dd[i].dinv), .dtr_row(dd[i].row));

    stream_fifo #(.T(dtr_t), .DEPTH(FIFO_DEPTH)) u_down (
      .clk, .rst_n,
      .in_valid (dv_[i]), .in_ready (dr_[i]), .in_data (dd[i]),
      .out_valid(qv[i]),  .out_ready(qr[i]),  .out_data(qd_[i]));

    mminv_fwd #(.NB(NB), .LINK(i)) u_f (
      .clk, .rst_n,
      .dtr_valid(qv[i]), .dtr_ready(qr[i]),
      .dtr_s(qd_[i].s), .dtr_c(qd_[i].c), .dtr_inv(qd_[i].inv), .dtr_u(qd_[i].u),
      .dtr_dinv(qd_[i].dinv), .dtr_row(qd_[i].row),
      .ftr_in_valid(fv[i]), .ftr_in_ready(fr[i]), .ftr_in_p(fp[i]),
      .ftr_out_valid(fv[i+1]), .ftr_out_ready(fr[i+1]), .ftr_out_p(fp[i+1]),
      .out_valid(ov[i]), .out_ready(or_[i]), .out_inv(od[i].inv), .out_row(od[i].row));

    stream_fifo #(.T(res_t), .DEPTH(FIFO_DEPTH)) u_out (
      .clk, .rst_n,
      .in_valid (ov[i]),  .in_ready (or_[i]), .in_data (od[i]),
      .out_valid(oqv[i]), .out_ready(oqr[i]), .out_data(oqd[i]));
    assign oqr[i]     = out_valid && out_ready;
    assign out_row[i] = oqd[i].row;
  end
endmodule
