// Directed testbench of the multicast mux with 4 slave ports.
//
// Checks, against values worked out by hand: a unicast leaves one cycle later
// with the slave-port index prepended to its ID; concurrent unicasts are served
// round-robin; a multicast request beats a unicast, the lowest-numbered of two
// multicast requests is the only one offered ready, and nothing is taken until
// its commit arrives; W beats are taken only from the master whose AW was
// accepted first, and each burst up to its last beat; B responses are routed
// to the port named by the upper ID bits, which are stripped; a full output
// register stops the mux from offering ready.
module tb_mcast_axi_mux;
  import mcast_axi_pkg::*;
  localparam int unsigned N = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] aw_valid, aw_ready, is_mcast, commit, w_valid, w_ready, b_valid, b_ready;
  aw_t     aw [N];
  w_t      w  [N];
  b_t      b;
  logic    m_aw_valid, m_aw_ready, m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  mst_aw_t m_aw;
  w_t      m_w;
  mst_b_t  m_b;

  mcast_axi_mux #(.NoSlvPorts(N), .MaxWTrans(8)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .slv_aw_valid_i (aw_valid), .slv_aw_ready_o (aw_ready), .slv_aw_i (aw),
    .slv_aw_is_mcast_i (is_mcast), .slv_aw_commit_i (commit),
    .slv_w_valid_i (w_valid), .slv_w_ready_o (w_ready), .slv_w_i (w),
    .slv_b_valid_o (b_valid), .slv_b_ready_i (b_ready), .slv_b_o (b),
    .mst_aw_valid_o (m_aw_valid), .mst_aw_ready_i (m_aw_ready), .mst_aw_o (m_aw),
    .mst_w_valid_o (m_w_valid), .mst_w_ready_i (m_w_ready), .mst_w_o (m_w),
    .mst_b_valid_i (m_b_valid), .mst_b_ready_o (m_b_ready), .mst_b_i (m_b));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask
  task automatic settle();
    @(negedge clk);
    #1;
  endtask

  initial begin
    aw_valid = '0; is_mcast = '0; commit = '0; w_valid = '0; b_ready = '0;
    m_aw_ready = 1; m_w_ready = 1; m_b_valid = 0; m_b = '0;
    for (int i = 0; i < N; i++) begin
      aw[i] = '{id: 4'(i + 8), addr: 48'(i) << 12, mask: '0, len: 8'd1, size: 3'd3, burst: 2'b01, lock: 1'b0};
      w[i]  = '{data: 512'(i), strb: '1, last: 1'b0};
    end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // unicast from port 2, one cycle through
    settle();
    aw_valid = 4'b0100;
    #1;
    check(aw_ready == 4'b0100 && !m_aw_valid, "port 2 granted, output still empty");
    @(posedge clk);
    settle();
    aw_valid = '0;
    check(m_aw_valid && m_aw.id == {4'd2, 4'd10} && m_aw.addr == 48'h2000, "AW out with extended ID");
    // round robin between ports 0 and 1: pointer is after 2, so 0 then 1
    aw_valid = 4'b0011;
    #1;
    check(aw_ready == 4'b0001, "round robin picks 0");
    @(posedge clk);
    settle();
    check(aw_ready == 4'b0010, "round robin then picks 1");
    @(posedge clk);
    settle();
    aw_valid = '0;
    // multicast precedence: 1 unicast, 2 and 3 multicast
    aw_valid = 4'b1110; is_mcast = 4'b1100;
    #1;
    check(aw_ready == 4'b0100, "lowest multicast requester offered ready");
    @(posedge clk);
    settle();
    check(m_aw.id[7:4] == 4'd1, "nothing taken without commit");
    commit = 4'b0100;
    #1;
    check(aw_ready == 4'b0100, "still offered to port 2");
    @(posedge clk);
    settle();
    commit = '0; aw_valid = 4'b1010;
    #1;
    check(m_aw_valid && m_aw.id[7:4] == 4'd2, "multicast from port 2 out");
    check(aw_ready == 4'b1000, "port 3 multicast next, unicast waits");
    commit = 4'b1000;
    @(posedge clk);
    settle();
    commit = '0; aw_valid = '0; is_mcast = '0;
    // AW order so far: 2, 0, 1, 2, 3 ; each burst has 2 beats
    w_valid = 4'b1111;
    #1;
    check(w_ready == 4'b0100, "W from port 2 first");
    @(posedge clk);
    settle();
    w[2].last = 1'b1;
    #1;
    check(w_ready == 4'b0100, "W stays with port 2 until last");
    @(posedge clk);
    settle();
    w[2].last = 1'b0;
    check(w_ready == 4'b0001, "then port 0");
    check(m_w_valid && m_w.data == 512'd2 && m_w.last, "W out: last beat of port 2");
    // B routing
    m_b_valid = 1; m_b = '{id: {4'd3, 4'd5}, resp: RESP_SLVERR};
    b_ready = 4'b1000;
    @(posedge clk);
    settle();
    m_b_valid = 0;
    check(b_valid == 4'b1000 && b.id == 4'd5 && b.resp == RESP_SLVERR, "B routed to port 3");
    @(posedge clk);
    settle();
    check(b_valid == '0, "B consumed");
    // back-pressure: output register fills, ready withdrawn
    m_aw_ready = 0; w_valid = '0;
    aw_valid = 4'b0001;
    @(posedge clk);
    settle();
    @(posedge clk);
    settle();
    check(aw_ready == '0, "no ready with output register full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
