// input_stream: Input Stream Module. Translates a task's function type into
// the micro-instructions (inst) that drive the two pipelines, collects the
// data each micro-instruction needs and issues it.
//
//   type        FB module (RNEA/Delta-RNEA)      BF module (MMinvGen)
//   ID          I_RNEA   (qdd = u)               -
//   FD          I_RNEA0  (qdd = 0, gives C)      I_MINV
//   M           -                                I_M
//   Minv        -                                I_MINV
//   Delta-ID    I_DRNEA  (qdd = u)               -
//   Delta-iFD   I_DRNEA  (qdd = u)               -
//   Delta-FD 0  I_RNEA0                          I_MINV   (first stage, as FD)
//   Delta-FD 1  I_DRNEA  (qdd from feedback)     -        (second stage)
//
// Every issue also pushes a descriptor (the task, its stage and which
// pipelines it used) to the schedule module, in issue order; since both
// pipelines keep order, the schedule module pairs results by position.
// Second-stage jobs from the feedback module have priority over new tasks.
// A new Delta-FD task is only admitted while fewer than FBK_DEPTH Delta-FD
// tasks are between their two stages, so the feedback buffer can never
// overflow and the feedback loop cannot dead-lock.
//
// Timing: one issue per cycle when every sink it needs is ready.
// The instruction table and the admission rule are this design's reading of
// the paper, which describes the module only by its function.
module input_stream
  import rbd_pkg::*;
#(
  parameter int FBK_DEPTH = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  // new task with sin/cos (from the trigonometric module)
  input  logic     new_valid,
  output logic     new_ready,
  input  ttask_t   new_task,
  // second-stage job from the feedback module
  input  logic     fbk_valid,
  output logic     fbk_ready,
  input  ttask_t   fbk_task,
  // Forward-Backward module
  output logic     fb_valid,
  input  logic     fb_ready,
  output rnea_in_t fb_data [NB_ROBOT],
  // Backward-Forward module
  output logic     bf_valid,
  input  logic     bf_ready,
  output vecn_t    bf_s,
  output vecn_t    bf_c,
  output logic     bf_inv,
  // descriptor to the schedule module
  output logic     desc_valid,
  input  logic     desc_ready,
  output desc_t    desc
);
  localparam int CW = $clog2(FBK_DEPTH + 1);
  logic [CW-1:0] dfd_open;          // Delta-FD tasks between their stages

  logic   use_fbk, sel_valid, fire, admit;
  ttask_t t;
  desc_t  d;

  always_comb begin
    use_fbk = fbk_valid;
    t       = use_fbk ? fbk_task : new_task;
    d       = '0;
    d.tt    = t;
    d.stage = use_fbk;
    case (t.tk.fn)
      F_ID:   begin d.needs_fb = 1'b1; d.inst_fb = I_RNEA; end
      F_FD:   begin d.needs_fb = 1'b1; d.inst_fb = I_RNEA0;
                    d.needs_bf = 1'b1; d.inst_bf = I_MINV; end
      F_M:    begin d.needs_bf = 1'b1; d.inst_bf = I_M; end
      F_MINV: begin d.needs_bf = 1'b1; d.inst_bf = I_MINV; end
      F_DID, F_DIFD:
              begin d.needs_fb = 1'b1; d.inst_fb = I_DRNEA; end
      default: // F_DFD
        if (use_fbk) begin d.needs_fb = 1'b1; d.inst_fb = I_DRNEA; end
        else begin
          d.needs_fb = 1'b1; d.inst_fb = I_RNEA0;
          d.needs_bf = 1'b1; d.inst_bf = I_MINV;
        end
    endcase
    admit     = use_fbk || (t.tk.fn != F_DFD) || (dfd_open < CW'(FBK_DEPTH));
    sel_valid = use_fbk ? fbk_valid : new_valid;
    fire      = sel_valid && admit && desc_ready &&
                (!d.needs_fb || fb_ready) && (!d.needs_bf || bf_ready);
  end

  assign new_ready  = fire && !use_fbk;
  assign fbk_ready  = fire && use_fbk;
  assign fb_valid   = sel_valid && admit && desc_ready && d.needs_fb && (!d.needs_bf || bf_ready);
  assign bf_valid   = sel_valid && admit && desc_ready && d.needs_bf && (!d.needs_fb || fb_ready);
  assign desc_valid = fire;
  assign desc       = d;
  assign bf_s       = t.s;
  assign bf_c       = t.c;
  assign bf_inv     = (d.inst_bf == I_MINV);

  always_comb begin
    for (int i = 0; i < NB_ROBOT; i++) begin
      fb_data[i].dmode = (d.inst_fb == I_DRNEA);
      fb_data[i].q     = t.tk.q[i];
      fb_data[i].s     = t.s[i];
      fb_data[i].c     = t.c[i];
      fb_data[i].qd    = t.tk.qd[i];
      fb_data[i].qdd   = (d.inst_fb == I_RNEA0) ? '0 : t.tk.u[i];
      fb_data[i].fext  = t.tk.fext[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dfd_open <= '0;
    else if (fire && t.tk.fn == F_DFD) begin
      if (use_fbk) dfd_open <= dfd_open - 1'b1;
      else         dfd_open <= dfd_open + 1'b1;
    end
  end

  a_open_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                 dfd_open <= CW'(FBK_DEPTH));
endmodule
