// nst_fifo -- parametric-depth synchronous FIFO.
//
// Used for every queue of the NeuroStream: the command FIFO behind the CMD
// register, the Cmd/OP1/OP2 operand FIFOs in front of the data-flow
// controller, the write-address FIFO and the result FIFO toward the cluster
// interconnect. The paper gives these queues and calls the command queue
// "parametric-depth"; the depths and this circular-buffer implementation are
// this design's choice.
// Interface: push_i writes wdata_i when not full; pop_i drops the head when
// not empty; rdata_o shows the head (first-word fall-through). A push and a
// pop in the same cycle are both taken. count_o is the fill level.
module nst_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     push_i,
  input  logic [WIDTH-1:0]         wdata_i,
  input  logic                     pop_i,
  output logic [WIDTH-1:0]         rdata_o,
  output logic                     full_o,
  output logic                     empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;
  logic do_push, do_pop;

  assign full_o  = (cnt == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty_o = (cnt == '0);
  assign count_o = cnt;
  assign rdata_o = mem[rptr];
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr <= '0;
      rptr <= '0;
      cnt  <= '0;
    end else begin
      if (do_push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      if (do_push && !do_pop) cnt <= cnt + 1'b1;
      else if (do_pop && !do_push) cnt <= cnt - 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_push) mem[wptr] <= wdata_i;
  end

  // a producer must not push into a full FIFO
  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni) !(push_i && full_o && !pop_i))
    else $error("nst_fifo: push while full");
endmodule
