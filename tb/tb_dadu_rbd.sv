// tb_dadu_rbd: end-to-end test of the accelerator at its default parameters
// (a 7-link robot). Streams a random mix of all seven functions (ID, FD, M,
// M^-1, Delta-ID, Delta-FD, Delta-iFD) as 32-bit words, collects the result
// words and compares every result with a double-precision reference model
// (RNEA, M by columns, Gauss-Jordan inverse, derivatives by central
// differences). Results of Delta-FD are recognised by their length and
// matched in their own order, since they leave after their second stage.
//
// Phases: (1) tasks back to back with the output always ready, where the
// input rate is checked (a task of W words takes W + 2 cycles); (2) a burst
// of Delta-FD tasks while the output is held off, so results back up and
// the Delta-FD admission limit is reached; (3) random output back-pressure.
// Each mechanism is counted and the test fails if one never happens:
// every function type, the feedback re-issue, derivative pass mode,
// joint FB + BF issue, the A(x - y) product, input stall, output stall and
// the admission limit.
module tb_dadu_rbd;
  import rbd_pkg::*;
  import rbd_ref_pkg::*;
  localparam int N  = 7;
  localparam int NT = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready, out_last;
  logic [31:0] in_word, out_word;

  dadu_rbd dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  // ----------------------------------------------------------- task set
  func_e fns [NT];
  rvn_t  tq [NT], tqd [NT], tu [NT];
  rfx_t  tfe [NT];
  rmn_t  tminv [NT];
  int    nwords [NT];

  // expected results, flattened in output word order
  real   expv [NT][3*N*N];

  function automatic void make_expect(int t);
    rmn_t M, Mi;
    rvn_t z, c, qdd, tau;
    real  dt [N][2*N];
    int   k;
    foreach (z[i]) z[i] = 0.0;
    M  = mass(N, tq[t]);
    Mi = inv(N, M);
    case (fns[t])
      F_ID: begin
        tau = id(N, tq[t], tqd[t], tu[t], tfe[t], 1'b1);
        for (int i = 0; i < N; i++) expv[t][i] = tau[i];
      end
      F_M, F_MINV:
        for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
          expv[t][i*N+j] = (fns[t] == F_M) ? M[i][j] : Mi[i][j];
      F_DID:
        for (int i = 0; i < N; i++) for (int j = 0; j < 2*N; j++)
          expv[t][i*2*N+j] = did(N, tq[t], tqd[t], tu[t], tfe[t], i, j);
      default: begin            // FD, DFD, DIFD
        if (fns[t] == F_DIFD) begin
          Mi = tminv[t];
          qdd = tu[t];
        end else begin
          c = id(N, tq[t], tqd[t], z, tfe[t], 1'b1);
          for (int i = 0; i < N; i++) begin
            qdd[i] = 0.0;
            for (int j = 0; j < N; j++) qdd[i] += Mi[i][j] * (tu[t][j] - c[j]);
          end
        end
        if (fns[t] == F_FD) begin
          for (int i = 0; i < N; i++) expv[t][i] = qdd[i];
        end else begin
          for (int i = 0; i < N; i++) for (int j = 0; j < 2*N; j++)
            dt[i][j] = did(N, tq[t], tqd[t], qdd, tfe[t], i, j);
          for (int i = 0; i < N; i++) for (int j = 0; j < 2*N; j++) begin
            real s;
            s = 0.0;
            for (int k2 = 0; k2 < N; k2++) s -= Mi[i][k2] * dt[k2][j];
            expv[t][i*2*N+j] = s;
          end
          if (fns[t] == F_DFD)
            for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
              expv[t][2*N*N+i*N+j] = Mi[i][j];
        end
      end
    endcase
    k = 0;
  endfunction

  function automatic logic [31:0] word_of(int t, int w);
    if (w == 0) return 32'(fns[t]);
    w = w - 1;
    if (w < N)         return r2fx(tq[t][w]);
    if (w < 2*N)       return r2fx(tqd[t][w-N]);
    if (w < 3*N)       return r2fx(tu[t][w-2*N]);
    if (w < 9*N)       return r2fx(tfe[t][(w-3*N)/6][(w-3*N)%6]);
    return r2fx(tminv[t][(w-9*N)/N][(w-9*N)%N]);
  endfunction

  initial begin
    for (int t = 0; t < NT; t++) begin
      if (t < 14)      fns[t] = func_e'(t % 7);
      else if (t < 22) fns[t] = F_DFD;               // burst for phase 2
      else             fns[t] = func_e'($urandom_range(0, 6));
      for (int i = 0; i < MAXN; i++) begin
        tq[t][i]  = rnd(-3.0, 3.0);
        tqd[t][i] = rnd(-1.0, 1.0);
        tu[t][i]  = (fns[t] == F_FD || fns[t] == F_DFD) ? rnd(-20.0, 20.0) : rnd(-2.0, 2.0);
        for (int r = 0; r < 6; r++) tfe[t][i][r] = t[0] ? rnd(-1.0, 1.0) : 0.0;
      end
      if (fns[t] == F_DIFD) tminv[t] = inv(N, mass(N, tq[t]));
      nwords[t] = 1 + task_words(fns[t]);
      make_expect(t);
    end
  end

  // ----------------------------------------------------------- driver
  int sent = 0, wi = 0;
  assign in_valid = rst_n && (sent < NT);
  assign in_word  = (sent < NT) ? word_of(sent, wi) : '0;
  always @(posedge clk)
    if (in_valid && in_ready) begin
      if (wi == nwords[sent] - 1) begin wi <= 0; sent <= sent + 1; end
      else wi <= wi + 1;
    end

  // output back-pressure by phase
  int phase = 1;
  always @(negedge clk)
    case (phase)
      1: out_ready = 1'b1;
      2: out_ready = 1'b0;
      default: out_ready = ($urandom_range(0, 3) != 0);
    endcase

  // ----------------------------------------------------------- monitor
  int q_other [$], q_dfd [$];
  initial for (int t = 0; t < NT; t++)
    if (fns[t] == F_DFD) q_dfd.push_back(t); else q_other.push_back(t);

  logic [31:0] rw [3*N*N];
  int nrw = 0, got = 0;
  int seen_fn [7];
  always @(posedge clk)
    if (rst_n && out_valid && out_ready) begin
      rw[nrw] = out_word;
      if (out_last) begin
        int t, len;
        real mx;
        len = nrw + 1;
        if (len == 3*N*N) begin
          t = (q_dfd.size() > 0) ? q_dfd.pop_front() : -1;
        end else begin
          t = (q_other.size() > 0) ? q_other.pop_front() : -1;
        end
        checks++;
        if (t < 0 || len != result_words(fns[t])) begin
          failures++;
          $display("ERROR: result %0d of %0d words matches no task", got, len);
        end else begin
          seen_fn[fns[t]]++;
          mx = 0.0;
          for (int k = 0; k < len; k++)
            if ((expv[t][k] < 0 ? -expv[t][k] : expv[t][k]) > mx)
              mx = (expv[t][k] < 0 ? -expv[t][k] : expv[t][k]);
          for (int k = 0; k < len; k++) begin
            checks++;
            if (!close(fx2r(rw[k]), expv[t][k], 0.03, 0.01 + 0.02 * mx)) begin
              failures++;
              if (failures < 20)
                $display("ERROR: task %0d fn %0d word %0d got %f exp %f", t, fns[t], k,
                         fx2r(rw[k]), expv[t][k]);
            end
          end
        end
        got++;
        nrw = 0;
      end else nrw++;
    end

  // ----------------------------------------------------------- mechanisms
  int n_fbk = 0, n_pass = 0, n_joint = 0, n_in_stall = 0, n_out_stall = 0, n_credit = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.fbk_valid && dut.fbk_ready) n_fbk++;
    if (dut.fbi_valid && dut.fbi_ready && !dut.fbi_data[0].dmode) n_pass++;
    if (dut.fbi_valid && dut.fbi_ready && dut.bfi_valid && dut.bfi_ready) n_joint++;
    if (in_valid && !in_ready) n_in_stall++;
    if (out_valid && !out_ready) n_out_stall++;
    if (dut.trg_valid && !dut.fbk_valid && dut.trg_task.fn == F_DFD && !dut.u_in.admit) n_credit++;
  end

  // phase control and rate check
  int t_p1 = 0, w_p1 = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (sent == 14);
    t_p1 = cyc;
    for (int t = 0; t < 14; t++) w_p1 += nwords[t] + 1;
    checks++;
    if (t_p1 > w_p1 + 10) begin
      failures++;
      $display("ERROR: 14 tasks of %0d words (+1 cycle each) took %0d cycles", w_p1, t_p1);
    end
    phase = 2;
    wait (sent == 22 || n_credit > 0);
    repeat (300) @(posedge clk);
    phase = 3;
    wait (got == NT);
    repeat (20) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("ERROR: extra output"); end
    for (int f = 0; f < 7; f++) begin
      checks++;
      if (seen_fn[f] == 0) begin failures++; $display("ERROR: function %0d never seen", f); end
    end
    $display("mechanisms: fbk=%0d pass=%0d joint=%0d products=%0d in_stall=%0d out_stall=%0d credit=%0d",
             n_fbk, n_pass, n_joint, dut.n_products, n_in_stall, n_out_stall, n_credit);
    checks += 7;
    if (n_fbk == 0)           begin failures++; $display("ERROR: no feedback re-issue"); end
    if (n_pass == 0)          begin failures++; $display("ERROR: no pass-mode job"); end
    if (n_joint == 0)         begin failures++; $display("ERROR: no joint FB+BF issue"); end
    if (dut.n_products == 0)  begin failures++; $display("ERROR: no A(x-y) product"); end
    if (n_in_stall == 0)      begin failures++; $display("ERROR: no input stall"); end
    if (n_out_stall == 0)     begin failures++; $display("ERROR: no output stall"); end
    if (n_credit == 0)        begin failures++; $display("ERROR: admission limit never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("ERROR: watchdog, sent=%0d got=%0d", sent, got);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
