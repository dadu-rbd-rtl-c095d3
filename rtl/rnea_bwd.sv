// rnea_bwd: backward submodule R_b of the RNEA round-trip pipeline for one
// link (LINK, 0-based). It re-derives the link transform from sin q / cos q
// (the paper's "reupdate transformation matrix": two words travel down
// instead of a 6x6 matrix) and performs one iteration of the backward loop:
//     f   = f_local + btr_in                  (lazy update: the child sends
//                                              its addend, the parent adds it)
//     tau = S^T f
//     btr_out = pX_i^* f = X^T f               (addend for the parent)
// The last link of the chain receives btr_in = 0 from the wrapper.
//
// Timing: one register stage; it fires when the link's downward record and
// btr_in are both valid and both output slots (btr_out to the parent,
// out_data to the link's output) are free. Throughput one task per cycle.
module rnea_bwd
  import rbd_pkg::*;
#(
  parameter int LINK = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      dtr_valid,
  output logic      dtr_ready,
  input  rnea_dtr_t dtr_in,
  input  logic      btr_in_valid,
  output logic      btr_in_ready,
  input  sv6_t      btr_in,
  output logic      btr_out_valid,
  input  logic      btr_out_ready,
  output sv6_t      btr_out,
  output logic      out_valid,
  input  logic      out_ready,
  output rnea_out_t out_data
);
  sv6_t      btr_n;
  rnea_out_t out_n;

  always_comb begin
    sv6_t ft;
    ft = sv_add(dtr_in.f, btr_in);
    btr_n = xt_mul(LINK, dtr_in.s, dtr_in.c, ft);
    out_n.dmode = dtr_in.dmode;
    out_n.q   = dtr_in.q;
    out_n.s   = dtr_in.s;
    out_n.c   = dtr_in.c;
    out_n.qd  = dtr_in.qd;
    out_n.tau = ft[2];
    out_n.v   = dtr_in.v;
    out_n.a   = dtr_in.a;
    out_n.f   = ft;
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
      btr_out  <= btr_n;
      out_data <= out_n;
    end
  end
endmodule
