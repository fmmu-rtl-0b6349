// fmmu_fifo: one packet queue between two FMMU blocks.
//
// Every pair of blocks that talk to each other (HRM->CMT, CMT->CTP, CTP->FC,
// ...) has its own request or response queue, so no queue is shared and none
// needs a lock. This is a synchronous first-in first-out buffer of DEPTH
// packets of any type T. The head packet is visible on rdata while empty is
// low (show-ahead), so a consumer can inspect it before deciding to pop it;
// the CMT and CTP use this to leave a request that cannot be served yet at the
// head of its queue.
//
// Interface: push/wdata is accepted when full is low; pop removes the head
// when empty is low. count and free give the occupancy. Push and pop may
// happen in the same cycle. Latency: a pushed packet is visible one cycle
// later. Reset empties the queue.
//
// The per-module queues follow the paper; the depth and the show-ahead
// interface are this design's choices.
module fmmu_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  T                         wdata,
  output logic                     full,
  input  logic                     pop,
  output T                         rdata,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [$clog2(DEPTH+1)-1:0] free
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                 mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  assign full  = (cnt == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty = (cnt == '0);
  assign count = cnt;
  assign free  = DEPTH[$clog2(DEPTH+1)-1:0] - cnt;
  assign rdata = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= wdata;
  end

  // A producer must not push into a full queue, nor a consumer pop an empty one.
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
