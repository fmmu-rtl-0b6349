// tb_fmmu_fifo: self-checking test of the packet queue. Random pushes and
// pops (including simultaneous ones, and attempts on a full or empty queue
// that must be refused by the producer side of the test) are compared with a
// SystemVerilog queue as reference; count, free, full and empty are checked
// every cycle.
module tb_fmmu_fifo;
  localparam int DEPTH = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, pop, full, empty;
  logic [15:0] wdata, rdata;
  logic [2:0] count, free;
  fmmu_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);

  logic [15:0] model [$];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    push = 0; pop = 0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      chk(count == 3'(model.size()), "count");
      chk(free == 3'(DEPTH - model.size()), "free");
      chk(empty == (model.size() == 0), "empty");
      chk(full == (model.size() == DEPTH), "full");
      if (model.size() != 0) chk(rdata == model[0], "head data");
      push  = ($urandom_range(99) < ((n / 500) % 2 ? 70 : 35)) && !full;
      pop   = ($urandom_range(99) < ((n / 500) % 2 ? 35 : 70)) && !empty;
      wdata = 16'($urandom());
      @(posedge clk);
      #1;
      if (pop)  void'(model.pop_front());
      if (push) model.push_back(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
