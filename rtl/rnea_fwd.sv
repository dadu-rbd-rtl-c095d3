// rnea_fwd: forward submodule R_f of the RNEA round-trip pipeline for one
// link (LINK, 0-based). It performs one iteration of the forward loop of the
// recursive Newton-Euler algorithm:
//     X   = iX_p(sin q, cos q)                 (constant sparsity, see rbd_pkg)
//     v   = X v_p + S qd
//     a   = X a_p + S qdd + v x S qd
//     f   = I a + v x* I v - fext
// and sends ftr = {v, a} to the next link's R_f and dtr = {q, sin, cos, qd,
// v, a, f} down to the link's FIFO toward R_b. Only the non-zero entries of X
// and I take part (they are elaboration-time constants of the link), which is
// the paper's sparsity and constant optimisation.
//
// Timing: one register stage. The stage fires when input_i and ftr_in are
// both valid and both output slots are free or being emptied; each output
// has its own valid flag so the two consumers may take the data in
// different cycles. Throughput one task per cycle. The whole iteration is
// evaluated combinationally in that cycle; the paper's multi-cycle resource
// sharing inside light submodules is not modelled.
module rnea_fwd
  import rbd_pkg::*;
#(
  parameter int LINK = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  rnea_in_t  in_data,
  input  logic      ftr_in_valid,
  output logic      ftr_in_ready,
  input  rnea_ftr_t ftr_in,
  output logic      ftr_out_valid,
  input  logic      ftr_out_ready,
  output rnea_ftr_t ftr_out,
  output logic      dtr_valid,
  input  logic      dtr_ready,
  output rnea_dtr_t dtr_out
);
  rnea_ftr_t ftr_n;
  rnea_dtr_t dtr_n;

  always_comb begin
    sv6_t v, a, iv;
    v = x_mul(LINK, in_data.s, in_data.c, ftr_in.v);
    v[2] = v[2] + in_data.qd;
    a = x_mul(LINK, in_data.s, in_data.c, ftr_in.a);
    a[2] = a[2] + in_data.qdd;
    a = sv_add(a, crm_s(v, in_data.qd));
    iv = i_mul(LINK, v);
    ftr_n.v = v;
    ftr_n.a = a;
    dtr_n.dmode = in_data.dmode;
    dtr_n.q  = in_data.q;
    dtr_n.s  = in_data.s;
    dtr_n.c  = in_data.c;
    dtr_n.qd = in_data.qd;
    dtr_n.v  = v;
    dtr_n.a  = a;
    dtr_n.f  = sv_sub(sv_add(i_mul(LINK, a), crf(v, iv)), in_data.fext);
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
      ftr_out <= ftr_n;
      dtr_out <= dtr_n;
    end
  end
endmodule
