// Testbench of the multi-address decoder with the 16-port address map of the
// accelerator (port j owns 0x0100_0000 + j * 0x4_0000, 256 KiB each).
//
// For random address/mask pairs with at most 10 mask bits, the reference
// expands the request into its full list of addresses and sorts each into the
// port whose interval contains it (start <= a < end). The decoder's select
// vector must name exactly the ports that received an address, and the
// address/mask subset it reports for each such port must expand to exactly
// the addresses that fell in that port. Requests outside the map must flag a
// decode error.
module tb_mcast_addr_decode;
  import mcast_axi_pkg::*;
  localparam int unsigned N = 16;
  localparam addr_t BASE = 48'h0100_0000;

  rule_t        map [N];
  addr_t        addr, mask;
  logic [N-1:0] sel;
  addr_t        oaddr [N];
  addr_t        omask [N];
  logic         err;
  int checks = 0, failures = 0;

  mcast_addr_decode #(.NoMstPorts(N)) dut (.addr_i(addr), .mask_i(mask), .addr_map_i(map),
      .select_o(sel), .addr_o(oaddr), .mask_o(omask), .dec_error_o(err));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // expand an address/mask pair into its list of addresses
  function automatic void expand(input addr_t a, input addr_t m, ref addr_t list [$]);
    int bits [$];
    list.delete();
    for (int b = 0; b < AddrWidth; b++) if (m[b]) bits.push_back(b);
    for (int k = 0; k < (1 << bits.size()); k++) begin
      addr_t x = a & ~m;
      for (int q = 0; q < bits.size(); q++) if (k[q]) x[bits[q]] = 1'b1;
      list.push_back(x);
    end
  endfunction

  task automatic one(input addr_t a, input addr_t m);
    addr_t all [$];
    addr_t got [$];
    logic [N-1:0] exp_sel = '0;
    int exp_cnt [N];
    addr = a; mask = m;
    #1;
    foreach (exp_cnt[j]) exp_cnt[j] = 0;
    expand(a, m, all);
    foreach (all[k]) for (int j = 0; j < N; j++)
      if (all[k] >= map[j].start_addr && all[k] < map[j].end_addr) begin
        exp_sel[j] = 1'b1;
        exp_cnt[j]++;
      end
    check(sel == exp_sel, $sformatf("addr %h mask %h: select %b expected %b", a, m, sel, exp_sel));
    check(err == (exp_sel == '0), "decode error flag");
    for (int j = 0; j < N; j++) if (exp_sel[j]) begin
      bit ok;
      expand(oaddr[j], omask[j], got);
      ok = (got.size() == exp_cnt[j]);
      foreach (got[k]) if (!(got[k] >= map[j].start_addr && got[k] < map[j].end_addr)) ok = 0;
      check(ok, $sformatf("addr %h mask %h: port %0d subset %h/%h has %0d addresses, expected %0d",
                          a, m, j, oaddr[j], omask[j], got.size(), exp_cnt[j]));
    end
  endtask

  initial begin
    for (int j = 0; j < N; j++)
      map[j] = '{idx: j, start_addr: BASE + (addr_t'(j) << 18), end_addr: BASE + (addr_t'(j + 1) << 18)};
    // Fig. 1-like examples on the port-index bits
    one(BASE + (addr_t'(5) << 18), addr_t'(3) << 18);     // 1xx -> 4..7
    one(BASE + (addr_t'(6) << 18), addr_t'(4) << 18);     // x10 -> 2,6
    one(BASE, addr_t'(15) << 18);                         // broadcast
    one(BASE + 48'h1234 * 8, '0);                         // unicast
    one(48'h0, '0);                                       // unmapped
    one(48'h0200_0000, addr_t'(1) << 25);                 // unmapped set
    for (int n = 0; n < 300; n++) begin
      addr_t a, m;
      a = BASE + addr_t'($urandom_range(0, 32'h3f_ffff));
      m = '0;
      for (int q = 0; q < $urandom_range(0, 10); q++) m[$urandom_range(0, 25)] = 1'b1;
      if ($urandom_range(0, 9) == 0) a = addr_t'({$urandom, $urandom});
      one(a, m);
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
