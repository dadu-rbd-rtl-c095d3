// fb_module: Forward-Backward Module. The RNEA round-trip pipeline followed
// by the Delta-RNEA round-trip pipeline, link by link: the per-link results
// of RNEA (v_i, a_i, total f_i, tau_i) are the inputs of the derivative
// submodules of the same link, which is the data path sharing the paper
// calls the Dynamics Array. A task whose micro-instruction needs no
// derivative (dmode = 0) crosses the Delta-RNEA submodules in data-pass mode
// and comes out with tau only, so ID and Delta-ID tasks can be mixed in the
// pipeline without reordering.
//
// Interface: in_valid/in_ready + in_data[NB] (q, sin, cos, qd, qdd, fext,
// dmode per link); out_valid/out_ready + out_tau[NB] and out_dtau[NB]
// (row i of d tau / d[q; qd], 2*NB words). Latency about 4*NB + 10 cycles,
// one task per cycle.
//
// Departure from the paper: the paper interleaves the R and D submodules of
// a link and may start the derivative forward pass before the RNEA backward
// pass has finished; here the two pipelines are simply chained, which adds
// latency but not throughput loss.
module fb_module
  import rbd_pkg::*;
#(
  parameter int NB = 7
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  rnea_in_t        in_data  [NB],
  output logic            out_valid,
  input  logic            out_ready,
  output fx_t             out_tau  [NB],
  output fx_t [2*NB-1:0]  out_dtau [NB]
);
  logic      mid_valid, mid_ready;
  rnea_out_t mid_data [NB];

  rnea_rtp #(.NB(NB)) u_rnea (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(mid_valid), .out_ready(mid_ready), .out_data(mid_data));

  drnea_rtp #(.NB(NB)) u_drnea (
    .clk, .rst_n,
    .in_valid(mid_valid), .in_ready(mid_ready), .in_data(mid_data),
    .out_valid, .out_ready, .out_tau, .out_dtau);
endmodule
