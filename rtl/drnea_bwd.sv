// drnea_bwd: backward submodule D_b of the Delta-RNEA round-trip pipeline
// for link LINK (0-based) of an NB-link chain.
//
// With df_i the link's own derivative columns (from D_f through the link
// FIFO) and btr_in the addend sent by the child (lazy update), it computes
//     dft      = df_i + btr_in                       (all 2*NB columns)
//     dtau_i   = S^T dft                             (row i of d tau / d u)
//     btr_out  = pX_i^* (dft + [column d/dq_i] S x* f_i)
// f_i is the link's total force from the RNEA pass; the extra S x* f_i term
// is the derivative of the transform itself, as in the paper's
// btr_{i-1} = X^*(d f_i + S_i x* f_i).
//
// One register stage, join of dtr and btr_in, fork to btr_out and the
// link's output; one task per cycle.
module drnea_bwd
  import rbd_pkg::*;
#(
  parameter int NB   = 7,
  parameter int LINK = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic              dtr_valid,
  output logic              dtr_ready,
  input  logic              dtr_dmode,
  input  fx_t               dtr_s,
  input  fx_t               dtr_c,
  input  fx_t               dtr_tau,
  input  sv6_t              dtr_f,
  input  sv6_t [2*NB-1:0]   dtr_df,
  input  logic              btr_in_valid,
  output logic              btr_in_ready,
  input  sv6_t [2*NB-1:0]   btr_in,
  output logic              btr_out_valid,
  input  logic              btr_out_ready,
  output sv6_t [2*NB-1:0]   btr_out,
  output logic              out_valid,
  input  logic              out_ready,
  output fx_t               out_tau,
  output fx_t  [2*NB-1:0]   out_dtau
);
  sv6_t [2*NB-1:0] btr_n;
  fx_t  [2*NB-1:0] dtau_n;

  always_comb begin
    sv6_t dft, sf;
    sf = s_crf(dtr_f);
    for (int col = 0; col < 2 * NB; col++) begin
      dft = sv_add(dtr_df[col], btr_in[col]);
      dtau_n[col] = dft[2];
      if (col == LINK) dft = sv_add(dft, sf);
      btr_n[col] = xt_mul(LINK, dtr_s, dtr_c, dft);
    end
  end

  wire free_b = !btr_out_valid || btr_out_ready;
  wire free_o = !out_valid || out_ready;
  wire fire   = dtr_valid && btr_in_valid && free_b && free_o;
  assign dtr_ready    = fire;
  assign btr_in_ready = fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      btr_out_valid <= 1'b0;
      out_valid     <= 1'b0;
    end else if (fire) begin
      btr_out_valid <= 1'b1;
      out_valid     <= 1'b1;
    end else begin
      if (btr_out_ready) btr_out_valid <= 1'b0;
      if (out_ready)     out_valid     <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      btr_out  <= dtr_dmode ? btr_n : '0;
      out_tau  <= dtr_tau;
      out_dtau <= dtr_dmode ? dtau_n : '0;
    end
  end
endmodule
