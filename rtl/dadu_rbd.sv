// dadu_rbd: top level of the rigid body dynamics accelerator (Fig. 13 of the
// design). A stream of 32-bit words carrying tasks comes in; a stream of
// 32-bit words carrying results goes out. Supported functions: ID, FD, M,
// M^-1, Delta-ID, Delta-FD and Delta-iFD.
//
// Data flow:
//   in_word -> decode -> trig (sin/cos of q) -> input stream
//   input stream -> FB module  (RNEA + Delta-RNEA round-trip pipelines)
//                -> BF module  (MMinvGen round-trip pipeline)
//                -> descriptor FIFO (one entry per issued job)
//   FB, BF, descriptors -> schedule (A(x - y) products) -> encode -> out_word
//   schedule -> feedback -> input stream   (second stage of Delta-FD)
//
// Tasks are independent and are processed in a streaming fashion: a new
// task can enter the pipelines every cycle, and several functions can be in
// flight at once. Results leave in issue order, except that a Delta-FD
// result leaves after its second stage, so it can be overtaken by tasks
// issued while its first stage was in flight.
//
// Interface: in_valid/in_ready/in_word (task words: type, q[NB], qd[NB],
// u[NB], fext[6*NB], and M^-1[NB*NB] for Delta-iFD); out_valid/out_ready/
// out_word/out_last (result words, out_last on the final word of a result).
// Timing: one task word per cycle in, one result word per cycle out; the
// pipelines accept one job per cycle.
//
// The robot is a serial chain of NB revolute joints; its kinematic and
// inertial constants are held in rbd_pkg. Branched robots (the paper's
// broadcast/reduce between trunk and branches) are not built in this design.
module dadu_rbd
  import rbd_pkg::*;
#(
  parameter int NB         = 7,           // links of the configured robot
  parameter int FBK_DEPTH  = 4,           // Delta-FD tasks between stages
  parameter int DESC_DEPTH = 8 * NB       // jobs in flight in the pipelines
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_word,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_word,
  output logic        out_last
);
  if (NB != NB_ROBOT) begin : g_nb_check
    $error("dadu_rbd: NB must equal rbd_pkg::NB_ROBOT");
  end

  // decode
  logic  dec_valid, dec_ready;
  task_t dec_task;
  decode_unit u_decode (
    .clk, .rst_n, .in_valid, .in_ready, .in_word,
    .out_valid(dec_valid), .out_ready(dec_ready), .out_task(dec_task)
  );

  // trigonometric module, the task rides along as payload
  logic  trg_valid, trg_ready;
  fx_t   trg_q [NB], trg_s [NB], trg_c [NB], dec_q [NB];
  task_t trg_task;
  ttask_t new_task;
  always_comb begin
    for (int i = 0; i < NB; i++) dec_q[i] = dec_task.q[i];
    new_task    = '0;
    new_task.tk = trg_task;
    for (int i = 0; i < NB; i++) begin
      new_task.s[i] = trg_s[i];
      new_task.c[i] = trg_c[i];
    end
  end
  trig_unit #(.NB(NB), .T(task_t)) u_trig (
    .clk, .rst_n,
    .in_valid(dec_valid), .in_ready(dec_ready), .in_q(dec_q), .in_tag(dec_task),
    .out_valid(trg_valid), .out_ready(trg_ready),
    .out_q(trg_q), .out_sin(trg_s), .out_cos(trg_c), .out_tag(trg_task)
  );

  // input stream
  logic     fbk_valid, fbk_ready, sfb_valid, sfb_ready;
  ttask_t   fbk_task, sfb_task;
  logic     fbi_valid, fbi_ready, bfi_valid, bfi_ready, bfi_inv;
  rnea_in_t fbi_data [NB];
  vecn_t    bfi_s, bfi_c;
  logic     dsi_valid, dsi_ready, dso_valid, dso_ready;
  desc_t    dsi, dso;
  input_stream #(.FBK_DEPTH(FBK_DEPTH)) u_in (
    .clk, .rst_n,
    .new_valid(trg_valid), .new_ready(trg_ready), .new_task,
    .fbk_valid, .fbk_ready, .fbk_task,
    .fb_valid(fbi_valid), .fb_ready(fbi_ready), .fb_data(fbi_data),
    .bf_valid(bfi_valid), .bf_ready(bfi_ready), .bf_s(bfi_s), .bf_c(bfi_c),
    .bf_inv(bfi_inv),
    .desc_valid(dsi_valid), .desc_ready(dsi_ready), .desc(dsi)
  );

  // Forward-Backward module
  logic            fbo_valid, fbo_ready;
  fx_t             fbo_tau  [NB];
  fx_t [2*NB-1:0]  fbo_dtau [NB];
  fb_module #(.NB(NB)) u_fb (
    .clk, .rst_n,
    .in_valid(fbi_valid), .in_ready(fbi_ready), .in_data(fbi_data),
    .out_valid(fbo_valid), .out_ready(fbo_ready),
    .out_tau(fbo_tau), .out_dtau(fbo_dtau)
  );

  // Backward-Forward module
  fx_t          bf_s [NB], bf_c [NB];
  logic         bfo_valid, bfo_ready, bfo_inv;
  fx_t [NB-1:0] bfo_row [NB];
  always_comb
    for (int i = 0; i < NB; i++) begin
      bf_s[i] = bfi_s[i];
      bf_c[i] = bfi_c[i];
    end
  mminv_rtp #(.NB(NB)) u_bf (
    .clk, .rst_n,
    .in_valid(bfi_valid), .in_ready(bfi_ready),
    .in_s(bf_s), .in_c(bf_c), .in_inv(bfi_inv),
    .out_valid(bfo_valid), .out_ready(bfo_ready),
    .out_row(bfo_row), .out_inv(bfo_inv)
  );

  // descriptors of the jobs in flight, in issue order
  stream_fifo #(.T(desc_t), .DEPTH(DESC_DEPTH)) u_desc (
    .clk, .rst_n,
    .in_valid(dsi_valid), .in_ready(dsi_ready), .in_data(dsi),
    .out_valid(dso_valid), .out_ready(dso_ready), .out_data(dso)
  );

  // schedule
  logic      res_valid, res_ready;
  result_t   res;
  logic [15:0] n_products;
  schedule_unit u_sched (
    .clk, .rst_n,
    .desc_valid(dso_valid), .desc_ready(dso_ready), .desc(dso),
    .fb_valid(fbo_valid), .fb_ready(fbo_ready), .fb_tau(fbo_tau), .fb_dtau(fbo_dtau),
    .bf_valid(bfo_valid), .bf_ready(bfo_ready), .bf_row(bfo_row),
    .res_valid, .res_ready, .res,
    .fbk_valid(sfb_valid), .fbk_ready(sfb_ready), .fbk_task(sfb_task),
    .n_products
  );

  // feedback
  logic [$clog2(FBK_DEPTH+1)-1:0] fbk_count;
  feedback_unit #(.DEPTH(FBK_DEPTH)) u_fbk (
    .clk, .rst_n,
    .in_valid(sfb_valid), .in_ready(sfb_ready), .in_task(sfb_task),
    .out_valid(fbk_valid), .out_ready(fbk_ready), .out_task(fbk_task),
    .count(fbk_count)
  );

  // encode
  encode_unit u_enc (
    .clk, .rst_n,
    .in_valid(res_valid), .in_ready(res_ready), .in_res(res),
    .out_valid, .out_ready, .out_word, .out_last
  );

  // the BF module echoes the instruction; it must match the descriptor
  a_bf_inst: assert property (@(posedge clk) disable iff (!rst_n)
                              bfo_valid && bfo_ready |-> bfo_inv == (dso.inst_bf == I_MINV));
endmodule
