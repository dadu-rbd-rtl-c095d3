// tb_decode_unit: streams random tasks of every function type as words,
// checks every field of each decoded task, that the body length follows
// the function type (the M^-1 block only for Delta-iFD), that words are
// held off while a decoded task waits, and the rate of one word per cycle
// plus one cycle per task when the output is always ready.
module tb_decode_unit;
  import rbd_pkg::*;
  localparam int NT = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_word;
  task_t       out_task;

  decode_unit dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] words [$];
  task_t exp_q [$];
  int total_words = 0;

  initial
    for (int t = 0; t < NT; t++) begin
      task_t tk;
      tk = '0;
      tk.fn = func_e'(t % 7);
      for (int i = 0; i < NR; i++) begin
        tk.q[i] = $urandom; tk.qd[i] = $urandom; tk.u[i] = $urandom;
        for (int r = 0; r < 6; r++) tk.fext[i][r] = $urandom;
        if (tk.fn == F_DIFD) for (int j = 0; j < NR; j++) tk.minv[i][j] = $urandom;
      end
      words.push_back(32'(tk.fn));
      for (int i = 0; i < NR; i++) words.push_back(tk.q[i]);
      for (int i = 0; i < NR; i++) words.push_back(tk.qd[i]);
      for (int i = 0; i < NR; i++) words.push_back(tk.u[i]);
      for (int i = 0; i < NR; i++) for (int r = 0; r < 6; r++) words.push_back(tk.fext[i][r]);
      if (tk.fn == F_DIFD)
        for (int i = 0; i < NR; i++) for (int j = 0; j < NR; j++) words.push_back(tk.minv[i][j]);
      exp_q.push_back(tk);
    end

  int wi = 0, got = 0, phase = 0, t_half = 0, w_half = 0;
  always @(negedge clk) begin
    in_valid  = rst_n && wi < words.size() && (phase == 0 || $urandom_range(0, 3) != 0);
    in_word   = (wi < words.size()) ? words[wi] : '0;
    out_ready = (phase == 0) || ($urandom_range(0, 2) == 0);
  end
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      checks++;
      if (in_ready) begin failures++; $display("ERROR: words accepted while a task waits"); end
    end
    if (in_valid && in_ready) wi++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_task != exp_q[got]) begin
        failures++; $display("ERROR: task %0d (fn %0d) decoded wrongly", got, exp_q[got].fn);
      end
      got++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (got == NT / 2);
    t_half = cyc;
    for (int t = 0; t < NT / 2; t++) w_half += 1 + task_words(exp_q[t].fn) + 1;
    checks++;
    if (t_half > w_half + 2) begin failures++; $display("ERROR: %0d cycles for %0d", t_half, w_half); end
    phase = 1;
    wait (got == NT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
