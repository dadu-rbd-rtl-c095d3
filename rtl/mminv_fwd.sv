// mminv_fwd: forward submodule M_f of the MMinvGen round-trip pipeline for
// link LINK (0-based). It finishes row i of M^-1 with the forward loop of
// the paper's MMinvGen algorithm:
//     if LINK > 0:  XP[:,j] = X P_parent[:,j]                (j >= i)
//                   row[j] -= Dinv U^T XP[:,j]
//     P[:,j] = S row[j] + (LINK > 0 ? XP[:,j] : 0)           (j >= i)
// and sends P (ftr) to M_f[LINK+1]. For out_M tasks the row from M_b is
// already final and passes straight through. Output: row i (entries j >= i;
// the rest of the symmetric matrix is the mirror) and the inv flag.
//
// One register stage, join (dtr, ftr_in), fork (ftr_out, out); one task per
// cycle.
module mminv_fwd
  import rbd_pkg::*;
#(
  parameter int NB   = 7,
  parameter int LINK = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic              dtr_valid,
  output logic              dtr_ready,
  input  fx_t               dtr_s,
  input  fx_t               dtr_c,
  input  logic              dtr_inv,
  input  sv6_t              dtr_u,
  input  fx_t               dtr_dinv,
  input  fx_t  [NB-1:0]     dtr_row,
  input  logic              ftr_in_valid,
  output logic              ftr_in_ready,
  input  sv6_t [NB-1:0]     ftr_in_p,
  output logic              ftr_out_valid,
  input  logic              ftr_out_ready,
  output sv6_t [NB-1:0]     ftr_out_p,
  output logic              out_valid,
  input  logic              out_ready,
  output logic              out_inv,
  output fx_t  [NB-1:0]     out_row
);
  fx_t  [NB-1:0] row_n;
  sv6_t [NB-1:0] p_n;

  always_comb begin
    sv6_t xp;
    row_n = dtr_row;
    p_n   = '0;
    for (int j = LINK; j < NB; j++) begin
      xp = '0;
      if (LINK > 0) begin
        xp = x_mul(LINK, dtr_s, dtr_c, ftr_in_p[j]);
        if (dtr_inv) row_n[j] = dtr_row[j] - fx_mul(dtr_dinv, dot6(dtr_u, xp));
      end
      p_n[j] = xp;
      p_n[j][2] = p_n[j][2] + row_n[j];
    end
  end

  wire free_f = !ftr_out_valid || ftr_out_ready;
  wire free_o = !out_valid || out_ready;
  wire fire   = dtr_valid && ftr_in_valid && free_f && free_o;
  assign dtr_ready    = fire;
  assign ftr_in_ready = fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ftr_out_valid <= 1'b0;
      out_valid     <= 1'b0;
    end else if (fire) begin
      ftr_out_valid <= 1'b1;
      out_valid     <= 1'b1;
    end else begin
      if (ftr_out_ready) ftr_out_valid <= 1'b0;
      if (out_ready)     out_valid     <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      ftr_out_p <= dtr_inv ? p_n : '0;
      out_inv   <= dtr_inv;
      out_row   <= row_n;
    end
  end
endmodule
