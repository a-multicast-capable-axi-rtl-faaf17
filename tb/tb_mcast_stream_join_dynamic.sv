// Testbench of the dynamic stream join (8 streams): random valid, select and
// output-ready vectors; the output must be valid exactly when every selected
// input is valid (and at least one is selected), and exactly the selected
// inputs must be acknowledged when the output handshakes.
module tb_mcast_stream_join_dynamic;
  localparam int unsigned N = 8;
  logic [N-1:0] v, r, s;
  logic ov, ordy;
  int checks = 0, failures = 0;

  mcast_stream_join_dynamic #(.N(N)) dut (.inp_valid_i(v), .inp_ready_o(r), .sel_i(s),
                                          .oup_valid_o(ov), .oup_ready_i(ordy));
  initial begin
    for (int n = 0; n < 2000; n++) begin
      automatic bit all = 1, any = 0;
      v = N'($urandom) | N'($urandom);   // biased towards valid
      s = N'($urandom) & N'($urandom);
      ordy = $urandom_range(0, 1);
      #1;
      for (int i = 0; i < N; i++) begin
        if (s[i]) begin any = 1; if (!v[i]) all = 0; end
      end
      checks++;
      if (ov != (all && any)) begin failures++; $display("FAIL valid v=%b s=%b", v, s); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (r[i] != (all && any && ordy && s[i])) begin
          failures++; $display("FAIL ready[%0d] v=%b s=%b", i, v, s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
