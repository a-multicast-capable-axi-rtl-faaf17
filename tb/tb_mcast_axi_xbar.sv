// End-to-end testbench of the multicast crossbar at its default size
// (16 x 16 ports, 512-bit data).
//
// The address map is that of a many-core accelerator: master port j owns the
// 256 KiB window 0x0100_0000 + j * 0x4_0000, so address bits 21:18 name the
// port and a mask over those bits addresses several ports at once. Every
// crossbar slave port is driven by a random master that issues unicasts,
// multicasts (random subsets of the ports through the mask, broadcast
// included) and writes to unmapped addresses, with random IDs and burst
// lengths. Every master port has a slave model with random back-pressure that
// checks each AW against its own window, checks that every W beat belongs to
// the transaction and master named by the extended ID, and answers OKAY or,
// when the transaction asks it to, SLVERR.
//
// Checked independently of the crossbar: each transaction reaches exactly the
// ports its address set covers, each once; each master gets one B per
// transaction, in order per ID, with the merged response expected from the
// slaves' answers (DECERR for unmapped addresses). Counted mechanisms, each of
// which must occur: unicast, multicast, broadcast, decode error, joined
// SLVERR, multicast held back by outstanding unicasts, unicast held back by
// outstanding multicasts, unicast held back by the same ID at another port,
// several multicasts outstanding to one port set, two multicasts competing in
// one mux, W back-pressure.
module tb_mcast_axi_xbar;
  import mcast_axi_pkg::*;

  localparam int unsigned N      = 16;
  localparam int unsigned NTXN   = 300;    // transactions per master
  localparam logic [47:0] BASE   = 48'h0100_0000;
  localparam int unsigned SHIFT  = 18;     // 0x40000 window per port

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  rule_t addr_map [N];
  for (genvar j = 0; j < N; j++) begin : gen_map
    assign addr_map[j] = '{idx: j, start_addr: BASE + (48'(j) << SHIFT),
                           end_addr: BASE + (48'(j + 1) << SHIFT)};
  end

  logic [N-1:0] s_aw_valid, s_aw_ready, s_w_valid, s_w_ready, s_b_valid, s_b_ready;
  aw_t          s_aw [N];
  w_t           s_w  [N];
  b_t           s_b  [N];
  logic [N-1:0] m_aw_valid, m_aw_ready, m_w_valid, m_w_ready, m_b_valid, m_b_ready;
  mst_aw_t      m_aw [N];
  w_t           m_w  [N];
  mst_b_t       m_b  [N];

  mcast_axi_xbar dut (
    .clk_i (clk), .rst_ni (rst_n), .addr_map_i (addr_map),
    .slv_aw_valid_i (s_aw_valid), .slv_aw_ready_o (s_aw_ready), .slv_aw_i (s_aw),
    .slv_w_valid_i  (s_w_valid),  .slv_w_ready_o  (s_w_ready),  .slv_w_i  (s_w),
    .slv_b_valid_o  (s_b_valid),  .slv_b_ready_i  (s_b_ready),  .slv_b_o  (s_b),
    .mst_aw_valid_o (m_aw_valid), .mst_aw_ready_i (m_aw_ready), .mst_aw_o (m_aw),
    .mst_w_valid_o  (m_w_valid),  .mst_w_ready_i  (m_w_ready),  .mst_w_o  (m_w),
    .mst_b_valid_i  (m_b_valid),  .mst_b_ready_o  (m_b_ready),  .mst_b_i  (m_b)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // ------------------------------------------------------------------ stimulus
  // transaction t of master i
  logic [47:0] t_addr  [N][NTXN];
  logic [47:0] t_mask  [N][NTXN];
  logic [3:0]  t_id    [N][NTXN];
  logic [7:0]  t_len   [N][NTXN];
  logic [7:0]  t_err   [N][NTXN];   // port that answers SLVERR, 8'hff none
  logic [N-1:0] t_tgt  [N][NTXN];   // expected target ports
  logic [1:0]  t_resp  [N][NTXN];   // expected B response
  int unsigned t_seen  [N][NTXN][N];
  int unsigned b_got   [N];

  function automatic data_t beat_data(int i, int t, int b);
    data_t d = '0;
    d[7:0]   = 8'(i);
    d[23:8]  = 16'(t);
    d[31:24] = 8'(b);
    d[39:32] = t_err[i][t];
    d[511:448] = {16'(i), 16'(t), 16'(b), 16'ha5a5};
    return d;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin
      for (int t = 0; t < NTXN; t++) begin
        automatic int kind = $urandom_range(0, 99);
        automatic logic [3:0] port = 4'($urandom_range(0, N - 1));
        automatic logic [3:0] pm;
        t_id[i][t]  = 4'($urandom_range(0, 3));
        t_len[i][t] = 8'($urandom_range(0, 3));
        t_err[i][t] = 8'hff;
        t_mask[i][t] = '0;
        if (kind < 4) begin
          // unmapped address: decode error
          t_addr[i][t] = 48'h0000_1000;
          t_tgt[i][t]  = '0;
          t_resp[i][t] = RESP_DECERR;
        end else begin
          if (kind < 45) pm = 4'h0;
          else if (kind < 55) pm = 4'hf;                   // broadcast
          else pm = 4'($urandom_range(1, 15));
          t_addr[i][t] = BASE + (48'(port) << SHIFT) + 48'($urandom_range(0, 4095) * 64);
          t_mask[i][t] = 48'(pm) << SHIFT;
          if (kind >= 45 && $urandom_range(0, 3) == 0) t_mask[i][t] |= 48'h0fc0;   // in-window bits too
          t_tgt[i][t] = '0;
          for (int j = 0; j < N; j++)
            if (((4'(j) ^ port) & ~pm) == 4'h0) t_tgt[i][t][j] = 1'b1;
          if ($urandom_range(0, 7) == 0) t_err[i][t] = 8'($urandom_range(0, N - 1));
          t_resp[i][t] = (t_err[i][t] != 8'hff && t_tgt[i][t][t_err[i][t]]) ? RESP_SLVERR : RESP_OKAY;
        end
        for (int j = 0; j < N; j++) t_seen[i][t][j] = 0;
      end
      b_got[i] = 0;
    end
  end

  // ------------------------------------------------------------------ masters
  for (genvar gi = 0; gi < N; gi++) begin : gen_master
    int aw_n = 0, w_n = 0, w_beat = 0;
    int unsigned id_q [4][$];

    always @(posedge clk) begin
      if (!rst_n) begin
        s_aw_valid[gi] <= 1'b0;
        s_w_valid[gi]  <= 1'b0;
        s_b_ready[gi]  <= 1'b0;
      end else begin
        // AW
        if (s_aw_valid[gi] && s_aw_ready[gi]) begin
          id_q[t_id[gi][aw_n]].push_back(aw_n);
          aw_n <= aw_n + 1;
          s_aw_valid[gi] <= 1'b0;
        end else if (!s_aw_valid[gi] && aw_n < NTXN && $urandom_range(0, 3) != 0) begin
          s_aw_valid[gi] <= 1'b1;
          s_aw[gi] <= '{id: t_id[gi][aw_n], addr: t_addr[gi][aw_n], mask: t_mask[gi][aw_n],
                        len: t_len[gi][aw_n], size: 3'd6, burst: 2'b01, lock: 1'b0};
        end
        // W, may run ahead of AW within the same master order
        if (s_w_valid[gi] && s_w_ready[gi]) begin
          s_w_valid[gi] <= 1'b0;
          if (w_beat == int'(t_len[gi][w_n])) begin
            w_beat <= 0;
            w_n    <= w_n + 1;
          end else begin
            w_beat <= w_beat + 1;
          end
        end else if (!s_w_valid[gi] && w_n < NTXN && $urandom_range(0, 4) != 0) begin
          s_w_valid[gi] <= 1'b1;
          s_w[gi] <= '{data: beat_data(gi, w_n, w_beat), strb: '1,
                       last: (w_beat == int'(t_len[gi][w_n]))};
        end
        // B
        s_b_ready[gi] <= ($urandom_range(0, 3) != 0);
        if (s_b_valid[gi] && s_b_ready[gi]) begin
          if (id_q[s_b[gi].id].size() == 0) begin
            check(1'b0, $sformatf("master %0d: B with ID %0d not outstanding", gi, s_b[gi].id));
          end else begin
            automatic int t = int'(id_q[s_b[gi].id].pop_front());
            check(s_b[gi].resp == t_resp[gi][t],
                  $sformatf("master %0d txn %0d: resp %0d, expected %0d", gi, t, s_b[gi].resp, t_resp[gi][t]));
            for (int j = 0; j < N; j++)
              check(t_seen[gi][t][j] == (t_tgt[gi][t][j] ? 1 : 0),
                    $sformatf("master %0d txn %0d port %0d: delivered %0d times, target %0b",
                              gi, t, j, t_seen[gi][t][j], t_tgt[gi][t][j]));
            b_got[gi] <= b_got[gi] + 1;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------------ slaves
  for (genvar gj = 0; gj < N; gj++) begin : gen_slave
    mst_aw_t aw_q [$];
    mst_b_t  b_q  [$];
    w_t      w_q  [$];
    int beat = 0;
    logic err = 1'b0;

    always @(posedge clk) begin
      if (!rst_n) begin
        m_aw_ready[gj] <= 1'b0;
        m_w_ready[gj]  <= 1'b0;
        m_b_valid[gj]  <= 1'b0;
      end else begin
        m_aw_ready[gj] <= ($urandom_range(0, 2) != 0);
        m_w_ready[gj]  <= ($urandom_range(0, 3) != 0);
        if (m_aw_valid[gj] && m_aw_ready[gj]) begin
          check((m_aw[gj].addr >> SHIFT) == ((BASE >> SHIFT) + 48'(gj)),
                $sformatf("port %0d: AW address %h outside window", gj, m_aw[gj].addr));
          check((m_aw[gj].mask >> SHIFT) == 0,
                $sformatf("port %0d: AW mask %h not resolved", gj, m_aw[gj].mask));
          aw_q.push_back(m_aw[gj]);
        end
        // W beats may legally arrive ahead of their AW: queue them
        if (m_w_valid[gj] && m_w_ready[gj]) w_q.push_back(m_w[gj]);
        while (aw_q.size() != 0 && w_q.size() != 0) begin
          automatic int i = int'(aw_q[0].id[IdWidth +: SlvIdxWidth]);
          automatic w_t w = w_q.pop_front();
          automatic int t = int'(w.data[23:8]);
          check(int'(w.data[7:0]) == i && int'(w.data[31:24]) == beat
                && w.last == (beat == int'(aw_q[0].len))
                && w.data == beat_data(i, t, beat),
                $sformatf("port %0d: W beat %0d of master %0d wrong", gj, beat, i));
          if (beat == 0) err = (int'(w.data[39:32]) == gj);
          if (w.last) begin
            check(t_addr[i][t][SHIFT-1:0] == aw_q[0].addr[SHIFT-1:0] || t_mask[i][t][SHIFT-1:0] != 0,
                  $sformatf("port %0d: offset of txn %0d/%0d changed", gj, i, t));
            t_seen[i][t][gj] = t_seen[i][t][gj] + 1;
            b_q.push_back('{id: aw_q[0].id, resp: (err ? RESP_SLVERR : RESP_OKAY)});
            void'(aw_q.pop_front());
            beat = 0;
          end else begin
            beat = beat + 1;
          end
        end
        if (m_b_valid[gj] && m_b_ready[gj]) begin
          m_b_valid[gj] <= 1'b0;
        end else if (!m_b_valid[gj] && b_q.size() != 0 && $urandom_range(0, 2) != 0) begin
          m_b_valid[gj] <= 1'b1;
          m_b[gj] <= b_q.pop_front();
        end
      end
    end
  end

  // ------------------------------------------------------------------ mechanism counters
  int n_uni [N], n_mc [N], n_bcast [N], n_decerr [N], n_slverr [N];
  int n_mc_stall_uni [N], n_uni_stall_mc [N], n_id_stall [N], n_mc_stack [N];
  int n_mc_compete [N], n_w_bp [N];
  for (genvar g = 0; g < N; g++) begin : gen_cnt
    initial begin
      n_uni[g] = 0; n_mc[g] = 0; n_bcast[g] = 0; n_decerr[g] = 0; n_slverr[g] = 0;
      n_mc_stall_uni[g] = 0; n_uni_stall_mc[g] = 0; n_id_stall[g] = 0; n_mc_stack[g] = 0;
      n_mc_compete[g] = 0; n_w_bp[g] = 0;
    end
    always @(posedge clk) if (rst_n) begin
      if (s_aw_valid[g] && s_aw_ready[g]) begin
        if (dut.gen_demux[g].i_demux.is_mcast) n_mc[g]++;
        else n_uni[g]++;
        if (dut.gen_demux[g].i_demux.aw_select[N-1:0] == '1) n_bcast[g]++;
      end
      if (s_b_valid[g] && s_b_ready[g]) begin
        if (s_b[g].resp == RESP_DECERR) n_decerr[g]++;
        if (s_b[g].resp == RESP_SLVERR && dut.gen_demux[g].i_demux.mcast_mode) n_slverr[g]++;
      end
      if (s_aw_valid[g] && dut.gen_demux[g].i_demux.is_mcast && dut.gen_demux[g].i_demux.uni_cnt_q != 0)
        n_mc_stall_uni[g]++;
      if (s_aw_valid[g] && !dut.gen_demux[g].i_demux.is_mcast && dut.gen_demux[g].i_demux.mcast_cnt_q != 0)
        n_uni_stall_mc[g]++;
      if (s_aw_valid[g] && !dut.gen_demux[g].i_demux.is_mcast
          && dut.gen_demux[g].i_demux.id_cnt_q[s_aw[g].id] != 0
          && dut.gen_demux[g].i_demux.id_port_q[s_aw[g].id] != dut.gen_demux[g].i_demux.aw_idx)
        n_id_stall[g]++;
      if (dut.gen_demux[g].i_demux.commit && dut.gen_demux[g].i_demux.mcast_cnt_q != 0)
        n_mc_stack[g]++;
      if ($countones(dut.gen_mux[g].i_mux.mc_req) > 1) n_mc_compete[g]++;
      if (s_w_valid[g] && !s_w_ready[g] && !dut.gen_demux[g].i_demux.w_fifo_empty) n_w_bp[g]++;
    end
  end

  function automatic int sum(int a [N]);
    sum = 0;
    foreach (a[k]) sum += a[k];
  endfunction

  task automatic need(input int n, input string what);
    $display("  %-40s %0d", what, n);
    check(n > 0, {"mechanism never exercised: ", what});
  endtask

  int cycles = 0;
  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    while (sum(b_got) < N * NTXN && cycles < 200000) begin
      @(posedge clk);
      cycles++;
    end
    repeat (10) @(posedge clk);
    check(sum(b_got) == N * NTXN, $sformatf("only %0d of %0d B responses", sum(b_got), N * NTXN));
    $display("completed %0d transactions in %0d cycles", sum(b_got), cycles);
    need(sum(n_uni), "unicast");
    need(sum(n_mc), "multicast");
    need(sum(n_bcast), "broadcast");
    need(sum(n_decerr), "decode error");
    need(sum(n_slverr), "joined SLVERR");
    need(sum(n_mc_stall_uni), "multicast waits for unicasts");
    need(sum(n_uni_stall_mc), "unicast waits for multicasts");
    need(sum(n_id_stall), "unicast waits for same ID elsewhere");
    need(sum(n_mc_stack), "multicast stacked on same port set");
    need(sum(n_mc_compete), "multicasts competing in a mux");
    need(sum(n_w_bp), "W back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
