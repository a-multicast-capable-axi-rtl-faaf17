// Testbench of the priority encoder: random and corner-case vectors, each
// compared with the index of the lowest set bit found by a bit-serial scan.
module tb_mcast_lzc;
  localparam int unsigned W = 17;
  logic [W-1:0] in;
  logic [4:0]   idx;
  logic         empty;
  int checks = 0, failures = 0;

  mcast_lzc #(.Width(W)) dut (.in_i(in), .idx_o(idx), .empty_o(empty));

  task automatic apply(input logic [W-1:0] v);
    int exp_idx = 0;
    bit found = 0;
    in = v;
    #1;
    for (int i = 0; i < W; i++) if (!found && v[i]) begin found = 1; exp_idx = i; end
    checks++;
    if (empty != !found || (found && int'(idx) != exp_idx)) begin
      failures++;
      $display("FAIL in=%b idx=%0d empty=%0b expected %0d/%0b", v, idx, empty, exp_idx, !found);
    end
  endtask

  initial begin
    apply('0);
    for (int i = 0; i < W; i++) apply(W'(1) << i);
    apply('1);
    for (int n = 0; n < 500; n++) apply(W'({$urandom, $urandom}) & W'({$urandom, $urandom}));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
