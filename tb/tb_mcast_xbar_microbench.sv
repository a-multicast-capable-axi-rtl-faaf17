// Multicast DMA microbenchmark on the full-size crossbar (16 x 16, 512-bit).
//
// One master, standing for a cluster DMA engine on slave port 0, copies the
// same buffer to a set of k master ports (clusters at 0x0100_0000 + j * 0x4_0000)
// in two ways: as k unicast transfers issued back to back, and as one
// multicast whose mask covers the port-index bits of the set. Buffers of 2, 8
// and 32 KiB (32, 128 and 512 beats of 64 B, in AXI bursts of at most 256
// beats) go to k = 2, 4, 8 and 16 ports. Slaves are always ready.
//
// Checked: every destination receives every beat exactly once and in order,
// the multicast returns one B per burst, and the multicast transfer is at
// least 0.8 * k times faster than the unicasts (an ideal crossbar would reach
// k; the bound is this testbench's, not a figure from the literature). The
// measured cycle counts and speedups are printed.
module tb_mcast_xbar_microbench;
  import mcast_axi_pkg::*;
  localparam int unsigned N = 16;
  localparam addr_t BASE = 48'h0100_0000;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  rule_t addr_map [N];
  for (genvar j = 0; j < N; j++) begin : gen_map
    assign addr_map[j] = '{idx: j, start_addr: BASE + (addr_t'(j) << 18), end_addr: BASE + (addr_t'(j + 1) << 18)};
  end

  logic [N-1:0] s_aw_valid, s_aw_ready, s_w_valid, s_w_ready, s_b_valid, s_b_ready;
  aw_t s_aw [N];
  w_t  s_w  [N];
  b_t  s_b  [N];
  logic [N-1:0] m_aw_valid, m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  mst_aw_t m_aw [N];
  w_t      m_w  [N];
  mst_b_t  m_b  [N];

  mcast_axi_xbar dut (
    .clk_i (clk), .rst_ni (rst_n), .addr_map_i (addr_map),
    .slv_aw_valid_i (s_aw_valid), .slv_aw_ready_o (s_aw_ready), .slv_aw_i (s_aw),
    .slv_w_valid_i  (s_w_valid),  .slv_w_ready_o  (s_w_ready),  .slv_w_i  (s_w),
    .slv_b_valid_o  (s_b_valid),  .slv_b_ready_i  (s_b_ready),  .slv_b_o  (s_b),
    .mst_aw_valid_o (m_aw_valid), .mst_aw_ready_i ('1),         .mst_aw_o (m_aw),
    .mst_w_valid_o  (m_w_valid),  .mst_w_ready_i  ('1),         .mst_w_o  (m_w),
    .mst_b_valid_i  (m_b_valid),  .mst_b_ready_o  (m_b_ready),  .mst_b_i  (m_b));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---------------------------------------------------------------- slaves
  int beats_rx [N];
  int bad_rx   [N];
  int base_rx  [N];    // beats_rx at the start of the current experiment
  int cur_beats = 1;   // beats per transfer in the current experiment
  for (genvar j = 0; j < N; j++) begin : gen_slave
    mst_b_t aw_q [$];
    mst_b_t b_q  [$];
    always @(posedge clk) begin
      if (!rst_n) begin
        m_b_valid[j] <= 1'b0;
        beats_rx[j]  <= 0;
        bad_rx[j]    <= 0;
      end else begin
        if (m_aw_valid[j]) aw_q.push_back('{id: m_aw[j].id, resp: RESP_OKAY});
        if (m_w_valid[j]) begin
          if (m_w[j].data != data_t'((beats_rx[j] - base_rx[j]) % cur_beats)) bad_rx[j] <= bad_rx[j] + 1;
          beats_rx[j] <= beats_rx[j] + 1;
          if (m_w[j].last) b_q.push_back(aw_q.pop_front());
        end
        if (m_b_valid[j] && m_b_ready[j]) m_b_valid[j] <= 1'b0;
        else if (!m_b_valid[j] && b_q.size() != 0) begin
          m_b_valid[j] <= 1'b1;
          m_b[j] <= b_q.pop_front();
        end
      end
    end
  end

  // ---------------------------------------------------------------- DMA master on port 0
  // Sends `beats` beats to address/mask, split in bursts of <= 256 beats; AW
  // and W run concurrently. Returns when all B responses are in.
  int b_cnt = 0;
  always @(posedge clk) if (s_b_valid[0] && s_b_ready[0]) begin
    b_cnt <= b_cnt + 1;
    check(s_b[0].resp == RESP_OKAY, "B OKAY");
  end

  task automatic transfer(input addr_t a [$], input addr_t m, input int beats, output int cycles);
    int nb = (beats + 255) / 256;
    int total_bursts = nb * a.size();
    int t0, b0;
    b0 = b_cnt;
    t0 = $time;
    fork
      begin : aw_thread
        foreach (a[d]) for (int k = 0; k < nb; k++) begin
          @(negedge clk);
          s_aw_valid[0] = 1'b1;
          s_aw[0] = '{id: '0, addr: a[d] + addr_t'(k * 256 * 64), mask: m,
                      len: 8'((k == nb - 1) ? beats - k * 256 - 1 : 255), size: 3'd6, burst: 2'b01, lock: 1'b0};
          @(posedge clk);
          while (!s_aw_ready[0]) @(posedge clk);
        end
        @(negedge clk);
        s_aw_valid[0] = 1'b0;
      end
      begin : w_thread
        foreach (a[d]) for (int q = 0; q < beats; q++) begin
          @(negedge clk);
          s_w_valid[0] = 1'b1;
          s_w[0] = '{data: data_t'(q), strb: '1, last: (q % 256 == 255) || (q == beats - 1)};
          @(posedge clk);
          while (!s_w_ready[0]) @(posedge clk);
        end
        @(negedge clk);
        s_w_valid[0] = 1'b0;
      end
    join
    while (b_cnt - b0 < total_bursts) @(posedge clk);
    cycles = ($time - t0) / 2;
  endtask

  initial begin
    int sizes [3] = '{32, 128, 512};
    int fan [4] = '{2, 4, 8, 16};
    s_aw_valid = '0; s_w_valid = '0; s_b_ready = '1;
    foreach (base_rx[j]) base_rx[j] = 0;
    foreach (s_aw[i]) begin s_aw[i] = '0; s_w[i] = '0; end
    repeat (4) @(posedge clk);
    rst_n = 1;
    foreach (fan[f]) foreach (sizes[s]) begin
      automatic int k = fan[f], beats = sizes[s];
      automatic int first = (k == N) ? 0 : k;                 // destination ports [first, first + k)
      int c_uni, c_mc, exp_beats;
      addr_t dst [$];
      addr_t one [$];
      int prev [N];
      // k unicasts
      foreach (beats_rx[j]) begin
        prev[j] = beats_rx[j];
        base_rx[j] = beats_rx[j];
      end
      cur_beats = beats;
      dst.delete();
      for (int j = first; j < first + k; j++) dst.push_back(BASE + (addr_t'(j) << 18));
      transfer(dst, '0, beats, c_uni);
      // one multicast
      one.delete();
      one.push_back(BASE + (addr_t'(first) << 18));
      transfer(one, addr_t'(k - 1) << 18, beats, c_mc);
      repeat (4) @(posedge clk);
      for (int j = 0; j < N; j++) begin
        exp_beats = (j >= first && j < first + k) ? 2 * beats : 0;
        check(beats_rx[j] - prev[j] == exp_beats,
              $sformatf("k=%0d %0d beats: port %0d got %0d beats, expected %0d", k, beats, j, beats_rx[j] - prev[j], exp_beats));
      end
      check(real'(c_uni) / real'(c_mc) >= 0.8 * k,
            $sformatf("k=%0d %0d B: speedup %.2f below %.2f", k, beats * 64, real'(c_uni) / real'(c_mc), 0.8 * k));
      $display("  %2d ports %6d B: unicasts %6d cycles, multicast %5d cycles, speedup %5.2f",
               k, beats * 64, c_uni, c_mc, real'(c_uni) / real'(c_mc));
    end
    foreach (bad_rx[j]) check(bad_rx[j] == 0, $sformatf("port %0d received %0d wrong beats", j, bad_rx[j]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
