// tb_input_stream: offers new tasks of every function type and second-stage
// Delta-FD tasks under random ready patterns of the two pipelines and the
// descriptor queue, and checks for every issue: the descriptor (stage,
// pipelines used, micro-instructions), the FB data (qdd = u, or 0 for
// I_RNEA0; dmode only for Delta-RNEA), the BF data and the M / M^-1 flag,
// that the FB and BF sides fire together, that second-stage jobs have
// priority, and that no more than FBK_DEPTH Delta-FD tasks are admitted
// before their second stage returns. Also checks one issue per cycle.
module tb_input_stream;
  import rbd_pkg::*;
  localparam int FBK_DEPTH = 4;
  localparam int NV = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     new_valid, new_ready, fbk_valid, fbk_ready;
  ttask_t   new_task, fbk_task;
  logic     fb_valid, fb_ready, bf_valid, bf_ready, bf_inv;
  rnea_in_t fb_data [NR];
  vecn_t    bf_s, bf_c;
  logic     desc_valid, desc_ready;
  desc_t    desc;

  input_stream #(.FBK_DEPTH(FBK_DEPTH)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_new = 0, n_fbk = 0, open_dfd = 0, n_limit = 0, n_prio = 0, mode = 0, t0 = 0;
  ttask_t pend [$];            // Delta-FD tasks waiting for their second stage

  function automatic ttask_t mk(func_e fn);
    ttask_t t;
    t = '0;
    t.tk.fn = fn;
    for (int i = 0; i < NR; i++) begin
      t.tk.q[i] = $urandom; t.tk.qd[i] = $urandom; t.tk.u[i] = $urandom | 1;
      t.s[i] = $urandom; t.c[i] = $urandom;
      for (int r = 0; r < 6; r++) t.tk.fext[i][r] = $urandom;
    end
    return t;
  endfunction

  always @(negedge clk) begin
    if (!(new_valid && !new_ready)) new_task = mk(func_e'($urandom_range(0, 6)));
    new_valid  = rst_n && n_new < NV;
    fbk_valid  = (pend.size() > 0) && (mode == 0 ? $urandom_range(0, 7) == 0 : $urandom_range(0, 24) == 0);
    fbk_task   = (pend.size() > 0) ? pend[0] : '0;
    fb_ready   = (mode == 0) || ($urandom_range(0, 3) != 0);
    bf_ready   = (mode == 0) || ($urandom_range(0, 3) != 0);
    desc_ready = (mode == 0) || ($urandom_range(0, 5) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (new_valid && !fbk_valid && new_task.tk.fn == F_DFD && open_dfd == FBK_DEPTH) begin
      n_limit++;
      checks++;
      if (new_ready) begin failures++; $display("ERROR: Delta-FD admitted over the limit"); end
    end
    if (fbk_valid && new_valid) begin
      n_prio++;
      checks++;
      if (new_ready) begin failures++; $display("ERROR: new task beat a second-stage job"); end
    end
    if (desc_valid && desc_ready) begin
      ttask_t t;
      logic st;
      st = fbk_ready;
      t  = st ? fbk_task : new_task;
      checks += 6;
      if ((new_ready + fbk_ready) != 1) begin failures++; $display("ERROR: source"); end
      if (desc.tt != t || desc.stage != st) begin failures++; $display("ERROR: descriptor"); end
      if ((fb_valid && fb_ready) != desc.needs_fb || (bf_valid && bf_ready) != desc.needs_bf) begin
        failures++; $display("ERROR: pipelines fire apart from the descriptor");
      end
      case (t.tk.fn)
        F_ID:   if (desc.needs_bf || desc.inst_fb != I_RNEA) failures++;
        F_FD:   if (desc.inst_fb != I_RNEA0 || desc.inst_bf != I_MINV || !desc.needs_bf) failures++;
        F_M:    if (desc.needs_fb || desc.inst_bf != I_M || bf_inv) failures++;
        F_MINV: if (desc.needs_fb || desc.inst_bf != I_MINV || !bf_inv) failures++;
        F_DID, F_DIFD: if (desc.needs_bf || desc.inst_fb != I_DRNEA) failures++;
        default:
          if (st ? (desc.needs_bf || desc.inst_fb != I_DRNEA)
                 : (desc.inst_fb != I_RNEA0 || !desc.needs_bf)) failures++;
      endcase
      if (desc.needs_fb)
        for (int i = 0; i < NR; i++)
          if (fb_data[i].q != t.tk.q[i] || fb_data[i].s != t.s[i] || fb_data[i].c != t.c[i] ||
              fb_data[i].qd != t.tk.qd[i] || fb_data[i].fext != t.tk.fext[i] ||
              fb_data[i].qdd != ((desc.inst_fb == I_RNEA0) ? '0 : t.tk.u[i]) ||
              fb_data[i].dmode != (desc.inst_fb == I_DRNEA)) begin
            failures++; $display("ERROR: FB data link %0d", i);
          end
      if (desc.needs_bf && (bf_s != t.s || bf_c != t.c)) begin failures++; $display("ERROR: BF data"); end
      if (st) begin void'(pend.pop_front()); open_dfd--; n_fbk++; end
      else begin
        n_new++;
        if (t.tk.fn == F_DFD) begin pend.push_back(t); open_dfd++; end
      end
    end else begin
      checks++;
      if ((fb_valid && fb_ready) || (bf_valid && bf_ready) || new_ready || fbk_ready) begin
        failures++; $display("ERROR: transfer without a descriptor");
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (n_new == 20);
    t0 = cyc;
    wait (n_new == 40);
    checks++;
    if (cyc - t0 > 20 + 20) begin failures++; $display("ERROR: 20 issues took %0d", cyc - t0); end
    mode = 1;
    wait (n_new == NV);
    $display("limit=%0d priority=%0d second_stage=%0d", n_limit, n_prio, n_fbk);
    checks += 2;
    if (n_limit == 0) begin failures++; $display("ERROR: limit never reached"); end
    if (n_fbk == 0)   begin failures++; $display("ERROR: no second stage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
