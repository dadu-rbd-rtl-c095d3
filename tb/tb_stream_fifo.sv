// tb_stream_fifo: pushes a random-valued sequence through the FIFO under
// random valid and ready patterns and checks order and completeness against
// a queue model, that in_ready drops exactly when DEPTH entries are held,
// and that a full-rate stream passes at one entry per cycle.
module tb_stream_fifo;
  localparam int DEPTH = 4;
  localparam int NV    = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;

  stream_fifo #(.T(logic [31:0]), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] model [$];
  int sent = 0, got = 0, mode = 0, t0 = 0;
  logic [31:0] vals [NV];
  initial foreach (vals[i]) vals[i] = $urandom;

  always @(negedge clk) begin
    in_valid  = rst_n && sent < NV && (mode == 0 || $urandom_range(0, 1) == 1);
    in_data   = vals[sent % NV];
    out_ready = (mode == 0) || ($urandom_range(0, 2) == 0);
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    checks++;
    if (in_ready != (model.size() < DEPTH)) begin
      failures++; $display("ERROR: in_ready %0d with %0d held", in_ready, model.size());
    end
    if (out_valid && out_ready) begin
      checks++;
      if (model.size() == 0 || out_data != model[0]) begin
        failures++; $display("ERROR: output %h", out_data);
      end
      void'(model.pop_front());
      got++;
    end
    if (in_valid && in_ready) begin model.push_back(in_data); sent++; end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (sent == 100);
    t0 = cyc;
    wait (got == 100);
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
