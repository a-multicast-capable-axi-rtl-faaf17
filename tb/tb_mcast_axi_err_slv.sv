// Testbench of the decode-error slave: several write bursts of random length
// with random IDs and random valid/ready timing; every burst must be answered
// with exactly one DECERR response carrying its ID, only after its last W beat,
// and the slave must not take a new AW before that response has been taken.
module tb_mcast_axi_err_slv;
  import mcast_axi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  id_t  aw_id;
  b_t   b;
  int checks = 0, failures = 0;

  mcast_axi_err_slv dut (.clk_i(clk), .rst_ni(rst_n), .aw_valid_i(aw_valid), .aw_ready_o(aw_ready),
    .aw_id_i(aw_id), .w_valid_i(w_valid), .w_ready_o(w_ready), .w_last_i(w_last),
    .b_valid_o(b_valid), .b_ready_i(b_ready), .b_o(b));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    aw_valid = 0; w_valid = 0; w_last = 0; b_ready = 0; aw_id = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      automatic id_t id = id_t'($urandom);
      automatic int len = $urandom_range(0, 4);
      @(negedge clk);
      aw_valid = 1; aw_id = id;
      while (!aw_ready) begin
        @(negedge clk);
      end
      @(negedge clk);
      aw_valid = 0; aw_id = ~id;
      for (int k = 0; k <= len; k++) begin
        while ($urandom_range(0, 1) == 0) begin
          check(!b_valid, "no response before the last beat");
          @(negedge clk);
        end
        w_valid = 1; w_last = (k == len);
        #1;
        check(w_ready && !b_valid, "W beat taken");
        @(negedge clk);
        w_valid = 0; w_last = 0;
      end
      aw_valid = 1;
      #1;
      check(!aw_ready, "no new AW before the response");
      aw_valid = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      b_ready = 1;
      #1;
      check(b_valid && b.id == id && b.resp == RESP_DECERR, "DECERR with ID");
      @(negedge clk);
      b_ready = 0;
      #1;
      check(!b_valid, "single response");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
