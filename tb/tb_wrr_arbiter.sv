// tb_wrr_arbiter: self-checking test of the weighted round robin arbiter.
// A reference model written independently (turn pointer plus packets left
// in the turn) predicts every grant for random request patterns and
// weights. With all queues always busy, the share of grants must match the
// weights exactly over whole rounds.
module tb_wrr_arbiter;
  localparam int N = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req;
  logic [N-1:0][3:0] weight;
  logic [1:0] grant;
  logic gnt_valid, take;
  wrr_arbiter #(.N(N), .WW(4)) dut (.*);

  // reference
  int m_ptr, m_left;   // m_left = 0: turn on m_ptr not started
  function automatic int ref_grant(output bit v);
    v = 0;
    for (int k = 0; k < N; k++) if (req[(m_ptr + k) % N]) begin v = 1; return (m_ptr + k) % N; end
    return m_ptr;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  int served [N];
  initial begin
    bit v;
    int g, w;
    req = '0; take = 0; weight = '0;
    m_ptr = 0; m_left = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // phase A: all busy, weights 4,2,1 -> shares 4:2:1
    weight = {4'd1, 4'd2, 4'd4};
    for (int i = 0; i < N; i++) served[i] = 0;
    for (int n = 0; n < 7 * 50; n++) begin
      @(negedge clk);
      req = '1; take = 1; #1;
      g = ref_grant(v);
      chk(gnt_valid == v && int'(grant) == g, "grant (all busy)");
      served[grant]++;
      @(posedge clk); #1;
      w = (weight[g] == 0) ? 1 : int'(weight[g]);
      if (g == m_ptr && m_left != 0) begin m_left--; if (m_left == 0) m_ptr = (m_ptr + 1) % N; end
      else if (w == 1) begin m_left = 0; m_ptr = (g + 1) % N; end
      else begin m_left = w - 1; m_ptr = g; end
    end
    chk(served[0] == 200 && served[1] == 100 && served[2] == 50, "weighted shares 4:2:1");
    $display("shares: %0d %0d %0d", served[0], served[1], served[2]);
    // phase B: random requests, weights and takes
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      req = N'($urandom());
      take = $urandom_range(3) != 0;
      if (n % 97 == 0) weight = {4'($urandom_range(5)), 4'($urandom_range(5)), 4'($urandom_range(5))};
      #1;
      g = ref_grant(v);
      chk(gnt_valid == v, "valid");
      if (v) chk(int'(grant) == g, "grant (random)");
      take = take && v;
      @(posedge clk); #1;
      if (take) begin
        w = (weight[g] == 0) ? 1 : int'(weight[g]);
        if (g == m_ptr && m_left != 0) begin m_left--; if (m_left == 0) m_ptr = (m_ptr + 1) % N; end
        else if (w == 1) begin m_left = 0; m_ptr = (g + 1) % N; end
        else begin m_left = w - 1; m_ptr = g; end
      end
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
