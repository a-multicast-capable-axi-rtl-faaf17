// Testbench of the round-robin arbiter (6 requesters). A reference model keeps
// its own priority pointer; every cycle the grant is compared with the first
// request at or after the pointer, and the grant must not move while it is not
// acknowledged. Also checks fairness: with all requests set and always
// acknowledged, every requester is granted once per 6 cycles.
module tb_mcast_rr_arb;
  localparam int unsigned N = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req, gnt;
  logic [2:0]   idx;
  logic         ack, valid;
  int checks = 0, failures = 0;
  int ptr = 0;

  mcast_rr_arb #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .ack_i(ack),
                             .gnt_o(gnt), .idx_o(idx), .valid_o(valid));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int cnt [N];
    req = '0; ack = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      automatic int e = -1;
      @(negedge clk);
      req = N'($urandom);
      ack = ($urandom_range(0, 2) != 0);
      #1;
      for (int i = 0; i < N; i++) if (e < 0 && req[(ptr + i) % N]) e = (ptr + i) % N;
      check(valid == (e >= 0), "valid");
      if (e >= 0) check(int'(idx) == e && gnt == (N'(1) << e),
                        $sformatf("grant %0d expected %0d (ptr %0d req %b)", idx, e, ptr, req));
      @(posedge clk);
      if (e >= 0 && ack) ptr = (e + 1) % N;
    end
    // fairness
    foreach (cnt[i]) cnt[i] = 0;
    @(negedge clk);
    req = '1; ack = 1;
    for (int n = 0; n < 6 * N; n++) begin
      @(posedge clk);
      cnt[idx]++;
    end
    foreach (cnt[i]) check(cnt[i] == 6, $sformatf("requester %0d granted %0d times", i, cnt[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
