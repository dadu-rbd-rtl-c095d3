// rnea_rtp: RNEA Round-Trip Pipeline for a serial chain of NB links.
//
// 2*NB submodules: forward R_f[0..NB-1] pass ftr = {v, a} down the chain,
// backward R_b[NB-1..0] pass the lazy-update addend btr back up. Each R_f[i]
// hands its intermediate data to R_b[i] through a downward FIFO (the bypass
// buffer), so a new task can enter R_f[0] every cycle while earlier tasks are
// still on their way back; data move like in a systolic array.
//
// Link i of a task is used i cycles after link 0 on the way out and leaves
// the pipeline in reverse order on the way back, so the wrapper gives every
// link an input skew FIFO and an output FIFO: a task is accepted when all
// input FIFOs have room (all links are pushed together) and is delivered
// when all links' results are present (all popped together). The base
// velocity is 0 and the base acceleration is the negated gravity vector
// (a_0 = [0 0 0 0 0 9.81]), the usual trick that adds gravity to every link.
//
// Interface: in_valid/in_ready + in_data[NB]; out_valid/out_ready +
// out_data[NB] (tau_i, v_i, a_i, total f_i and the pass-through q, sin, cos,
// qd). Latency about 2*NB + 4 cycles, one task per cycle in steady state.
module rnea_rtp
  import rbd_pkg::*;
#(
  parameter int NB = 7,
  parameter int FIFO_DEPTH = 2 * NB + 2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  rnea_in_t  in_data [NB],
  output logic      out_valid,
  input  logic      out_ready,
  output rnea_out_t out_data [NB]
);
  // per-link handshakes
  logic      sk_ready [NB], sk_valid [NB], sk_pop [NB];
  rnea_in_t  sk_data  [NB];
  logic      ftr_v  [NB+1], ftr_r [NB+1];
  rnea_ftr_t ftr_d  [NB+1];
  logic      dtr_v  [NB], dtr_r [NB], dq_v [NB], dq_r [NB];
  rnea_dtr_t dtr_d  [NB], dq_d [NB];
  logic      btr_v  [NB+1], btr_r [NB+1];
  sv6_t      btr_d  [NB+1];
  logic      o_v [NB], o_r [NB], oq_v [NB], oq_r [NB];
  rnea_out_t o_d [NB];

  // all-links join on the input side and on the output side
  always_comb begin
    in_ready  = 1'b1;
    out_valid = 1'b1;
    for (int i = 0; i < NB; i++) begin
      in_ready  = in_ready  && sk_ready[i];
      out_valid = out_valid && oq_v[i];
    end
  end

  // base of the chain: v_0 = 0, a_0 = -gravity, always available
  assign ftr_v[0] = 1'b1;
  always_comb begin
    ftr_d[0] = '0;
    ftr_d[0].a[5] = GRAV;
  end
  assign ftr_r[NB]  = 1'b1;            // end of chain: nothing further
  assign btr_v[NB]  = 1'b1;            // leaf: no child addend
  assign btr_d[NB]  = '0;
  assign btr_r[0]   = 1'b1;            // base: addend to the fixed world dropped

  for (genvar i = 0; i < NB; i++) begin : g_link
    stream_fifo #(.T(rnea_in_t), .DEPTH(FIFO_DEPTH)) u_skew (
      .clk, .rst_n,
      .in_valid (in_valid && in_ready), .in_ready (sk_ready[i]), .in_data (in_data[i]),
      .out_valid(sk_valid[i]), .out_ready(sk_pop[i]), .out_data(sk_data[i]));

    rnea_fwd #(.LINK(i)) u_f (
      .clk, .rst_n,
      .in_valid     (sk_valid[i]), .in_ready    (sk_pop[i]), .in_data(sk_data[i]),
      .ftr_in_valid (ftr_v[i]),    .ftr_in_ready(ftr_r[i]),  .ftr_in (ftr_d[i]),
      .ftr_out_valid(ftr_v[i+1]),  .ftr_out_ready(ftr_r[i+1]), .ftr_out(ftr_d[i+1]),
      .dtr_valid    (dtr_v[i]),    .dtr_ready   (dtr_r[i]),  .dtr_out(dtr_d[i]));

    stream_fifo #(.T(rnea_dtr_t), .DEPTH(FIFO_DEPTH)) u_down (
      .clk, .rst_n,
      .in_valid (dtr_v[i]), .in_ready (dtr_r[i]), .in_data (dtr_d[i]),
      .out_valid(dq_v[i]),  .out_ready(dq_r[i]),  .out_data(dq_d[i]));

    rnea_bwd #(.LINK(i)) u_b (
      .clk, .rst_n,
      .dtr_valid    (dq_v[i]),    .dtr_ready    (dq_r[i]),   .dtr_in (dq_d[i]),
      .btr_in_valid (btr_v[i+1]), .btr_in_ready (btr_r[i+1]), .btr_in(btr_d[i+1]),
      .btr_out_valid(btr_v[i]),   .btr_out_ready(btr_r[i]),  .btr_out(btr_d[i]),
      .out_valid    (o_v[i]),     .out_ready    (o_r[i]),    .out_data(o_d[i]));

    stream_fifo #(.T(rnea_out_t), .DEPTH(FIFO_DEPTH)) u_out (
      .clk, .rst_n,
      .in_valid (o_v[i]),  .in_ready (o_r[i]),  .in_data (o_d[i]),
      .out_valid(oq_v[i]), .out_ready(oq_r[i]), .out_data(out_data[i]));
    assign oq_r[i] = out_valid && out_ready;
  end
endmodule
