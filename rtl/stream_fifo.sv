// stream_fifo: valid/ready FIFO carrying one record of type T per entry.
//
// This is the "FIFO buffer" of the round-trip pipelines: it sits on every
// downward path from a forward submodule to the backward submodule of the
// same link and holds that link's intermediate data until the backward pass
// of the same task arrives, so the forward pass can keep accepting new tasks
// (the bypass buffer). It is also used as a skew buffer on the inputs and
// outputs of each pipeline, where link i is served i cycles after link 0.
//
// Interface: push side in_valid/in_ready/in_data, pop side
// out_valid/out_ready/out_data; a transfer happens on a rising clock edge
// when valid and ready are both high. First-word latency is one cycle (the
// head is read from the storage array, no fall-through). DEPTH is any
// value >= 2. Reset empties the FIFO; the storage itself is not reset.
// The paper gives no depth; callers size it from the pipeline length.
module stream_fifo #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);

  T               mem [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic [AW:0]    count;

  wire do_push = in_valid && in_ready;
  wire do_pop  = out_valid && out_ready;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= (AW+1)'(DEPTH));
endmodule
