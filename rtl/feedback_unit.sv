// feedback_unit: Feedback Module. Holds Delta-FD tasks between their two
// stages. The schedule module hands over the task after its first stage,
// already carrying qdd (in the u field) and M^-1 (in the minv field); this
// module buffers it and returns it to the input stream module, which then
// issues the Delta-RNEA second stage evaluated at that qdd.
//
// Interface: valid/ready in and out, a FIFO of DEPTH entries, and an
// occupancy output. The input stream module admits at most DEPTH Delta-FD
// tasks at a time, so a push never meets a full buffer (asserted in the
// FIFO). The paper states the feedback path exists ("the Feedback Module
// executes the next stage based on the previous results"); the buffer
// depth and credit scheme are this design's choices.
module feedback_unit
  import rbd_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  ttask_t in_task,
  output logic   out_valid,
  input  logic   out_ready,
  output ttask_t out_task,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  stream_fifo #(.T(ttask_t), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_task),
    .out_valid, .out_ready, .out_data(out_task)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count <= '0;
    else case ({in_valid && in_ready, out_valid && out_ready})
      2'b10:   count <= count + 1'b1;
      2'b01:   count <= count - 1'b1;
      default: ;
    endcase
  end
endmodule
