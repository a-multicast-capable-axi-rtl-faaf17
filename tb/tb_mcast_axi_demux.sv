// Directed testbench of the multicast demux with 4 master ports, port j owning
// [j * 0x1000, (j + 1) * 0x1000) so that address bits 13:12 name the port.
//
// Scenarios, each checked cycle by cycle against values worked out by hand:
// unicast routing; a multicast to ports 1 and 3 that is not accepted while
// only one of them is ready and is committed in the cycle both are; the split
// of the address set between the two ports; W beats forked only when both
// ports are ready; B responses joined only when both have answered, with
// SLVERR winning and the ID of the lower port; unicasts held back by an
// outstanding multicast and vice versa; a unicast held back by the same ID
// outstanding at another port while a different ID passes; a second multicast
// to the same ports accepted while the first is outstanding, one to other
// ports held back, and the limit of MaxMcastTrans (2 here); a write to an
// unmapped address answered with DECERR by the internal error slave.
module tb_mcast_axi_demux;
  import mcast_axi_pkg::*;
  localparam int unsigned N = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  rule_t map [N];
  logic  aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  aw_t   aw;
  w_t    w;
  b_t    b;
  logic [N-1:0] m_aw_valid, m_aw_ready, m_commit, m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  aw_t   m_aw [N];
  logic  m_is_mcast;
  w_t    m_w;
  b_t    m_b [N];

  mcast_axi_demux #(.NoMstPorts(N), .MaxTrans(4), .MaxMcastTrans(2), .MaxWTrans(4)) dut (
    .clk_i (clk), .rst_ni (rst_n), .addr_map_i (map),
    .slv_aw_valid_i (aw_valid), .slv_aw_ready_o (aw_ready), .slv_aw_i (aw),
    .slv_w_valid_i (w_valid), .slv_w_ready_o (w_ready), .slv_w_i (w),
    .slv_b_valid_o (b_valid), .slv_b_ready_i (b_ready), .slv_b_o (b),
    .mst_aw_valid_o (m_aw_valid), .mst_aw_ready_i (m_aw_ready), .mst_aw_o (m_aw),
    .mst_aw_is_mcast_o (m_is_mcast), .mst_aw_commit_o (m_commit),
    .mst_w_valid_o (m_w_valid), .mst_w_ready_i (m_w_ready), .mst_w_o (m_w),
    .mst_b_valid_i (m_b_valid), .mst_b_ready_o (m_b_ready), .mst_b_i (m_b));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // drive at the falling edge, look at combinational outputs 1 time unit later
  task automatic settle();
    @(negedge clk);
    #1;
  endtask

  task automatic set_aw(input logic [3:0] id, input addr_t a, input addr_t m);
    aw_valid = 1;
    aw = '{id: id, addr: a, mask: m, len: 8'd0, size: 3'd3, burst: 2'b01, lock: 1'b1};
  endtask

  task automatic idle();
    aw_valid = 0; w_valid = 0; b_ready = 0;
    m_aw_ready = '0; m_w_ready = '0; m_b_valid = '0;
  endtask

  task automatic do_w(input logic [N-1:0] ports);
    // one single-beat burst to `ports`, all ready
    w_valid = 1; w = '{data: 512'hbeef, strb: '1, last: 1'b1};
    m_w_ready = ports;
    #1;
    check(w_ready && m_w_valid == ports && m_w.data == 512'hbeef, $sformatf("W to %b", ports));
    @(posedge clk);
    settle(); w_valid = 0; m_w_ready = '0;
  endtask

  task automatic do_b(input int port, input logic [3:0] id, input resp_e r);
    m_b_valid = N'(1) << port; m_b[port] = '{id: id, resp: r}; b_ready = 1;
    #1;
    check(b_valid && b.id == id && b.resp == r && m_b_ready[port], $sformatf("B from %0d", port));
    @(posedge clk);
    settle(); m_b_valid = '0; b_ready = 0;
  endtask

  initial begin
    for (int j = 0; j < N; j++)
      map[j] = '{idx: j, start_addr: addr_t'(j * 32'h1000), end_addr: addr_t'((j + 1) * 32'h1000)};
    idle();
    aw = '0; w = '0;
    foreach (m_b[j]) m_b[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1. unicast to port 2
    settle();
    set_aw(4'd1, 48'h2040, '0);
    #1;
    check(m_aw_valid == 4'b0100 && !m_is_mcast && !aw_ready, "unicast offered to port 2 only");
    m_aw_ready = 4'b0100;
    #1;
    check(aw_ready && m_aw[2].addr == 48'h2040 && m_aw[2].lock, "unicast accepted, lock kept");
    @(posedge clk);
    settle(); idle();
    do_w(4'b0100);
    // 6. same ID to another port is held back, other ID passes
    set_aw(4'd1, 48'h0040, '0);
    m_aw_ready = '1;
    #1;
    check(m_aw_valid == '0 && !aw_ready, "same ID to other port stalls");
    set_aw(4'd2, 48'h0040, '0);
    #1;
    check(m_aw_valid == 4'b0001 && aw_ready, "other ID passes");
    @(posedge clk);
    settle(); idle();
    do_w(4'b0001);
    // 5a. multicast while unicasts are outstanding is held back
    set_aw(4'd3, 48'h1000, 48'h2000);
    m_aw_ready = '1;
    #1;
    check(m_aw_valid == '0 && !aw_ready, "multicast waits for unicasts");
    aw_valid = 0;
    do_b(2, 4'd1, RESP_OKAY);
    do_b(0, 4'd2, RESP_OKAY);

    // 2. multicast to ports 1 and 3
    set_aw(4'd3, 48'h1000 + 48'h80, 48'h2000 | 48'h40);
    m_aw_ready = 4'b0010;
    #1;
    check(m_aw_valid == 4'b1010 && m_is_mcast, "multicast offered to ports 1 and 3");
    check(!aw_ready && m_commit == '0, "no commit while port 3 not ready");
    @(posedge clk);
    settle();
    m_aw_ready = 4'b1010;
    #1;
    check(aw_ready && m_commit == 4'b1010, "commit when both ready");
    check(m_aw[1].addr == 48'h1080 && m_aw[1].mask == 48'h40 && m_aw[3].addr == 48'h3080
          && m_aw[3].mask == 48'h40, "address subsets");
    check(!m_aw[1].lock, "exclusive bit cleared on multicast");
    @(posedge clk);
    settle(); idle();
    // 3. W fork
    w_valid = 1; w = '{data: 512'h1234, strb: '1, last: 1'b1};
    m_w_ready = 4'b0010;
    #1;
    check(!w_ready && m_w_valid == '0, "W waits for all ports");
    m_w_ready = 4'b1010;
    #1;
    check(w_ready && m_w_valid == 4'b1010, "W forked");
    @(posedge clk);
    settle(); idle();
    // 5b. unicast held back while multicast outstanding
    set_aw(4'd5, 48'h0000, '0);
    m_aw_ready = '1;
    #1;
    check(m_aw_valid == '0, "unicast waits for multicast");
    // 8. second multicast to same ports with same ID is accepted
    set_aw(4'd3, 48'h1000, 48'h2000);
    #1;
    check(aw_ready && m_commit == 4'b1010, "second multicast to same ports");
    @(posedge clk);
    settle();
    set_aw(4'd3, 48'h1000, 48'h2000);
    #1;
    check(!aw_ready, "MaxMcastTrans reached");
    set_aw(4'd3, 48'h0000, 48'h1000);
    #1;
    check(!aw_ready && m_aw_valid == '0, "multicast to other ports waits");
    aw_valid = 0; m_aw_ready = '0;
    do_w(4'b1010);
    // 4. B join
    settle();
    m_b_valid = 4'b0010; m_b[1] = '{id: 4'd3, resp: RESP_OKAY}; b_ready = 1;
    #1;
    check(!b_valid && m_b_ready == '0, "B waits for both ports");
    m_b_valid = 4'b1010; m_b[3] = '{id: 4'd3, resp: RESP_DECERR};
    #1;
    check(b_valid && b.resp == RESP_SLVERR && b.id == 4'd3 && m_b_ready == 4'b1010, "B joined, SLVERR");
    @(posedge clk);
    settle();
    m_b[3] = '{id: 4'd3, resp: RESP_OKAY};
    #1;
    check(b_valid && b.resp == RESP_OKAY, "B joined, OKAY");
    @(posedge clk);
    settle(); idle();
    // unicast now flows again
    set_aw(4'd5, 48'h0000, '0);
    m_aw_ready = '1;
    #1;
    check(aw_ready && m_aw_valid == 4'b0001, "unicast after multicasts done");
    @(posedge clk);
    settle(); idle();
    do_w(4'b0001);
    do_b(0, 4'd5, RESP_OKAY);
    // 7. decode error
    set_aw(4'd6, 48'h10000, '0);
    #1;
    check(m_aw_valid == '0 && aw_ready, "unmapped write goes to error slave");
    @(posedge clk);
    settle(); idle();
    w_valid = 1; w = '{data: '0, strb: '1, last: 1'b1};
    #1;
    check(w_ready && m_w_valid == '0, "error slave takes W");
    @(posedge clk);
    settle(); idle();
    b_ready = 1;
    #1;
    check(b_valid && b.resp == RESP_DECERR && b.id == 4'd6, "DECERR response");
    @(posedge clk);
    settle(); idle();
    #1;
    check(!b_valid, "no further responses");
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
