// wrr_arbiter: weighted round robin choice of the queue to fetch from.
//
// The CMT and the CTP each fetch their next packet from one of N queues. The
// arbiter walks the queues in a fixed circular order and stays on the current
// queue for up to weight[i] packets before moving on; an empty (or blocked)
// queue is skipped at once. Response queues get a larger weight than request
// queues because one response can release many waiting requests.
//
// Interface: req[i] says queue i has a packet that may be taken now. grant is
// the queue index the consumer should take from and gnt_valid says there is
// one; both are combinational from req and the internal pointer. The consumer
// pulses take for one cycle when it removes a packet from queue grant; the
// pointer and the remaining credit update at that clock edge. Weights are
// sampled when the arbiter moves onto a queue; a weight of 0 counts as 1.
//
// The weighted round robin policy is the paper's; the credit counter and the
// skip-empty rule are this design's way of doing it.
module wrr_arbiter #(
  parameter int N  = 3,
  parameter int WW = 4            // weight width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic [N-1:0][WW-1:0] weight,
  output logic [$clog2(N)-1:0] grant,
  output logic                 gnt_valid,
  input  logic                 take
);
  localparam int IW = $clog2(N);

  logic [IW-1:0] ptr;
  logic [WW-1:0] credit;   // packets still allowed from queue ptr

  function automatic logic [IW-1:0] wrap(input int i);
    return IW'(i % N);
  endfunction

  // First requesting queue at or after ptr. A credit of 0 means the arbiter
  // has just arrived at ptr and has not served it yet in this turn.
  always_comb begin
    grant     = ptr;
    gnt_valid = 1'b0;
    for (int k = N - 1; k >= 0; k--) begin
      if (req[wrap(int'(ptr) + k)]) begin
        grant     = wrap(int'(ptr) + k);
        gnt_valid = 1'b1;
      end
    end
  end

  logic [WW-1:0] w_of_grant;
  assign w_of_grant = (weight[grant] == '0) ? WW'(1) : weight[grant];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr    <= '0;
      credit <= '0;
    end else if (take && gnt_valid) begin
      if (grant == ptr && credit != '0) begin
        // continuing the current turn
        credit <= credit - 1'b1;
        if (credit == WW'(1)) ptr <= wrap(int'(ptr) + 1);
      end else begin
        // starting a turn on grant
        if (w_of_grant == WW'(1)) begin
          credit <= '0;
          ptr    <= wrap(int'(grant) + 1);
        end else begin
          credit <= w_of_grant - 1'b1;
          ptr    <= grant;
        end
      end
    end
  end

  // a take without a valid grant is a consumer error
  assert property (@(posedge clk) disable iff (!rst_n) take |-> gnt_valid);

endmodule
