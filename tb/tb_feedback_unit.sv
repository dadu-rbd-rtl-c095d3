// tb_feedback_unit: pushes random second-stage tasks into the feedback
// buffer under random valid/ready patterns, checks order and contents
// against a queue model, the occupancy output, that the buffer refuses a
// push only when DEPTH tasks are held, and one task per cycle at full rate.
module tb_feedback_unit;
  import rbd_pkg::*;
  localparam int DEPTH = 4;
  localparam int NV    = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   in_valid, in_ready, out_valid, out_ready;
  ttask_t in_task, out_task;
  logic [$clog2(DEPTH+1)-1:0] count;

  feedback_unit #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  ttask_t model [$];
  int sent = 0, got = 0, mode = 0, t0 = 0;

  function automatic ttask_t mk(int n);
    ttask_t t;
    t = '0;
    t.tk.fn = F_DFD;
    for (int i = 0; i < NR; i++) begin
      t.tk.q[i] = $urandom; t.tk.u[i] = 32'(n); t.s[i] = $urandom;
      t.tk.minv[i][i] = $urandom;
    end
    return t;
  endfunction

  always @(negedge clk) begin
    in_valid  = rst_n && sent < NV && (mode == 0 || $urandom_range(0, 1) == 1);
    if (!(in_valid && in_ready) || in_task.tk.u[0] != 32'(sent)) in_task = mk(sent);
    out_ready = (mode == 0) || ($urandom_range(0, 2) == 0);
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    checks += 2;
    if (in_ready != (model.size() < DEPTH)) begin failures++; $display("ERROR: in_ready"); end
    if (count != model.size()) begin failures++; $display("ERROR: count %0d vs %0d", count, model.size()); end
    if (out_valid && out_ready) begin
      checks++;
      if (model.size() == 0 || out_task != model[0]) begin failures++; $display("ERROR: task %0d", got); end
      void'(model.pop_front());
      got++;
    end
    if (in_valid && in_ready) begin model.push_back(in_task); sent++; end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (sent == 50);
    t0 = cyc;
    wait (got == 50);
    checks++;
    if (cyc - t0 > 2) begin failures++; $display("ERROR: full rate took %0d", cyc - t0); end
    mode = 1;
    wait (got == NV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
