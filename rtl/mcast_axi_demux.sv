// Multicast-capable AXI write demultiplexer: one per crossbar slave port
// (i.e. per connected master).
//
// AW: the request's address and multicast mask are decoded against the address
// map. The result is a set of crossbar master ports (`sel`); more than one set
// bit makes the transaction a multicast (`mst_aw_is_mcast_o`). A unicast is
// sent to its single port and handshakes normally. A multicast is offered to
// all its ports at once and is accepted only in the cycle in which every
// addressed mux is ready for it; in that cycle the demux raises `commit`
// towards those muxes, and they all take the request together. Each port
// receives the part of the address set that falls inside it.
//
// Ordering rules (the stall logic): a unicast is held back while another
// transaction with the same ID is outstanding to a different port (a table
// indexed by ID keeps count and port), and while any multicast is outstanding.
// A multicast is held back while any unicast is outstanding, and while earlier
// multicasts are outstanding unless it goes to the very same set of ports;
// at most MaxMcastTrans multicasts may be outstanding. That multicasts to the
// same set must also carry the same ID is this design's addition: it keeps B
// responses joinable when slaves reorder across IDs.
//
// W: the port set of each accepted AW is queued; each W beat is forked to all
// ports of the queue head and transferred only when all are ready.
//
// B: for unicasts, a round-robin arbiter passes responses back. While
// multicasts are outstanding, one response from each port of the multicast is
// joined into a single response: its ID is taken from the lowest-numbered port
// (priority encoder) and its resp is SLVERR if any part answered SLVERR or
// DECERR, else OKAY. Exclusive multicasts are not allowed: the lock bit of a
// multicast is cleared, so EXOKAY never needs joining.
//
// Addresses that hit no rule go to an internal error slave (DECERR); this is
// not described in the paper. The demux itself is combinational from input to
// output; state is the ID table, the multicast counter and port set, and the W
// routing queue.
module mcast_axi_demux
  import mcast_axi_pkg::*;
#(
  parameter int unsigned NoMstPorts    = 16,
  parameter int unsigned NoRules       = NoMstPorts,
  parameter int unsigned MaxTrans      = 8,   // outstanding unicasts per ID
  parameter int unsigned MaxMcastTrans = 8,   // outstanding multicasts
  parameter int unsigned MaxWTrans     = 8,   // AWs whose W beats are pending
  localparam int unsigned NP   = NoMstPorts + 1,        // + error slave
  localparam int unsigned PIdxW = $clog2(NP)
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  rule_t addr_map_i [NoRules],
  // slave port (from the master)
  input  logic  slv_aw_valid_i,
  output logic  slv_aw_ready_o,
  input  aw_t   slv_aw_i,
  input  logic  slv_w_valid_i,
  output logic  slv_w_ready_o,
  input  w_t    slv_w_i,
  output logic  slv_b_valid_o,
  input  logic  slv_b_ready_i,
  output b_t    slv_b_o,
  // master ports (towards the muxes)
  output logic [NoMstPorts-1:0] mst_aw_valid_o,
  input  logic [NoMstPorts-1:0] mst_aw_ready_i,
  output aw_t                   mst_aw_o [NoMstPorts],
  output logic                  mst_aw_is_mcast_o,
  output logic [NoMstPorts-1:0] mst_aw_commit_o,
  output logic [NoMstPorts-1:0] mst_w_valid_o,
  input  logic [NoMstPorts-1:0] mst_w_ready_i,
  output w_t                    mst_w_o,
  input  logic [NoMstPorts-1:0] mst_b_valid_i,
  output logic [NoMstPorts-1:0] mst_b_ready_o,
  input  b_t                    mst_b_i [NoMstPorts]
);
  localparam int unsigned NoIds = 2**IdWidth;
  localparam int unsigned CntW  = $clog2(MaxTrans + 1);
  localparam int unsigned MCntW = $clog2(MaxMcastTrans + 1);

  // ---------------------------------------------------------------- decode
  logic [NoMstPorts-1:0] dec_sel;
  addr_t                 dec_addr [NoMstPorts];
  addr_t                 dec_mask [NoMstPorts];
  logic                  dec_err;

  mcast_addr_decode #(.NoMstPorts(NoMstPorts), .NoRules(NoRules)) i_decode (
    .addr_i      (slv_aw_i.addr),
    .mask_i      (slv_aw_i.mask),
    .addr_map_i  (addr_map_i),
    .select_o    (dec_sel),
    .addr_o      (dec_addr),
    .mask_o      (dec_mask),
    .dec_error_o (dec_err)
  );

  logic [NP-1:0]    aw_select;
  logic [PIdxW-1:0] aw_idx;
  logic             is_mcast;
  assign aw_select = {dec_err, dec_sel};

  function automatic int unsigned popcount(logic [NP-1:0] v);
    popcount = 0;
    for (int i = 0; i < NP; i++) popcount += int'(v[i]);
  endfunction
  assign is_mcast = popcount(aw_select) > 1;

  mcast_lzc #(.Width(NP)) i_aw_lzc (.in_i(aw_select), .idx_o(aw_idx), .empty_o());

  // ---------------------------------------------------------------- state
  logic [CntW-1:0]  id_cnt_q  [NoIds];
  logic [PIdxW-1:0] id_port_q [NoIds];
  logic [$clog2(NoIds*MaxTrans+1)-1:0] uni_cnt_q;
  logic [MCntW-1:0] mcast_cnt_q;
  logic [NP-1:0]    b_select_q;
  id_t              mcast_id_q;

  // ---------------------------------------------------------------- stall
  logic w_fifo_full, w_fifo_empty;
  logic uni_stall, mcast_stall, stall;
  always_comb begin
    uni_stall = (mcast_cnt_q != '0)
             || ((id_cnt_q[slv_aw_i.id] != '0) && (id_port_q[slv_aw_i.id] != aw_idx))
             || (id_cnt_q[slv_aw_i.id] == CntW'(MaxTrans));
    mcast_stall = (uni_cnt_q != '0)
               || ((mcast_cnt_q != '0) && ((b_select_q != aw_select) || (mcast_id_q != slv_aw_i.id)))
               || (mcast_cnt_q == MCntW'(MaxMcastTrans));
    stall = w_fifo_full || (is_mcast ? mcast_stall : uni_stall);
  end

  // ---------------------------------------------------------------- AW fork
  logic [NP-1:0] aw_ready_all, aw_valid_all;
  logic          err_aw_ready, aw_valid, uni_hs, commit, aw_hs;

  assign aw_ready_all = {err_aw_ready, mst_aw_ready_i};
  assign aw_valid     = slv_aw_valid_i && !stall;
  assign aw_valid_all = aw_valid ? aw_select : '0;
  assign uni_hs       = aw_valid && !is_mcast && aw_ready_all[aw_idx];
  assign commit       = aw_valid && is_mcast && ((aw_ready_all | ~aw_select) == '1);
  assign aw_hs        = uni_hs || commit;
  assign slv_aw_ready_o = aw_hs;

  assign mst_aw_valid_o    = aw_valid_all[NoMstPorts-1:0];
  assign mst_aw_is_mcast_o = is_mcast;
  assign mst_aw_commit_o   = commit ? aw_select[NoMstPorts-1:0] : '0;

  always_comb begin
    for (int p = 0; p < NoMstPorts; p++) begin
      mst_aw_o[p]      = slv_aw_i;
      mst_aw_o[p].addr = dec_addr[p];
      mst_aw_o[p].mask = dec_mask[p];
      mst_aw_o[p].lock = slv_aw_i.lock && !is_mcast;
    end
  end

  // ---------------------------------------------------------------- W fork
  logic [NP-1:0] w_select, w_ready_all, w_valid_all;
  logic          w_all_ready, w_hs, err_w_ready;

  mcast_fifo #(.Width(NP), .Depth(MaxWTrans)) i_w_fifo (
    .clk_i, .rst_ni,
    .push_i  (aw_hs),
    .data_i  (aw_select),
    .pop_i   (w_hs && slv_w_i.last),
    .data_o  (w_select),
    .full_o  (w_fifo_full),
    .empty_o (w_fifo_empty)
  );

  assign w_ready_all   = {err_w_ready, mst_w_ready_i};
  assign w_all_ready   = !w_fifo_empty && ((w_ready_all | ~w_select) == '1);
  assign w_valid_all   = (slv_w_valid_i && w_all_ready) ? w_select : '0;
  assign slv_w_ready_o = w_all_ready;
  assign w_hs          = slv_w_valid_i && w_all_ready;
  assign mst_w_valid_o = w_valid_all[NoMstPorts-1:0];
  assign mst_w_o       = slv_w_i;

  // ---------------------------------------------------------------- error slave
  logic err_b_valid, err_b_ready;
  b_t   err_b;
  mcast_axi_err_slv i_err_slv (
    .clk_i, .rst_ni,
    .aw_valid_i (aw_valid_all[NoMstPorts]),
    .aw_ready_o (err_aw_ready),
    .aw_id_i    (slv_aw_i.id),
    .w_valid_i  (w_valid_all[NoMstPorts]),
    .w_ready_o  (err_w_ready),
    .w_last_i   (slv_w_i.last),
    .b_valid_o  (err_b_valid),
    .b_ready_i  (err_b_ready),
    .b_o        (err_b)
  );

  // ---------------------------------------------------------------- B join
  logic [NP-1:0]    b_valid_all, b_ready_all, join_ready, arb_gnt;
  b_t               b_all [NP];
  logic [PIdxW-1:0] arb_idx, first_idx;
  logic             arb_valid, join_valid, mcast_mode, b_hs;

  assign b_valid_all = {err_b_valid, mst_b_valid_i};
  always_comb begin
    for (int p = 0; p < NoMstPorts; p++) b_all[p] = mst_b_i[p];
    b_all[NoMstPorts] = err_b;
  end
  assign mcast_mode = (mcast_cnt_q != '0);

  mcast_rr_arb #(.N(NP)) i_b_arb (
    .clk_i, .rst_ni,
    .req_i   (mcast_mode ? '0 : b_valid_all),
    .ack_i   (slv_b_ready_i),
    .gnt_o   (arb_gnt),
    .idx_o   (arb_idx),
    .valid_o (arb_valid)
  );

  mcast_stream_join_dynamic #(.N(NP)) i_b_join (
    .inp_valid_i (b_valid_all),
    .inp_ready_o (join_ready),
    .sel_i       (mcast_mode ? b_select_q : '0),
    .oup_valid_o (join_valid),
    .oup_ready_i (slv_b_ready_i)
  );

  mcast_lzc #(.Width(NP)) i_b_lzc (.in_i(b_select_q), .idx_o(first_idx), .empty_o());

  always_comb begin
    logic any_err;
    any_err = 1'b0;
    for (int p = 0; p < NP; p++) any_err |= b_select_q[p] && b_all[p].resp[1];
    if (mcast_mode) begin
      slv_b_valid_o = join_valid;
      slv_b_o.id    = b_all[first_idx].id;
      slv_b_o.resp  = any_err ? RESP_SLVERR : RESP_OKAY;
      b_ready_all   = join_ready;
    end else begin
      slv_b_valid_o = arb_valid;
      slv_b_o       = b_all[arb_idx];
      b_ready_all   = slv_b_ready_i ? arb_gnt : '0;
    end
  end
  assign mst_b_ready_o = b_ready_all[NoMstPorts-1:0];
  assign err_b_ready   = b_ready_all[NoMstPorts];
  assign b_hs          = slv_b_valid_o && slv_b_ready_i;

  // ---------------------------------------------------------------- counters
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NoIds; i++) begin
        id_cnt_q[i]  <= '0;
        id_port_q[i] <= '0;
      end
      uni_cnt_q   <= '0;
      mcast_cnt_q <= '0;
      b_select_q  <= '0;
      mcast_id_q  <= '0;
    end else begin
      // unicast ID table
      if (uni_hs) id_port_q[slv_aw_i.id] <= aw_idx;
      if (uni_hs && !(b_hs && !mcast_mode && slv_b_o.id == slv_aw_i.id))
        id_cnt_q[slv_aw_i.id] <= id_cnt_q[slv_aw_i.id] + 1'b1;
      if (b_hs && !mcast_mode && !(uni_hs && slv_b_o.id == slv_aw_i.id))
        id_cnt_q[slv_b_o.id] <= id_cnt_q[slv_b_o.id] - 1'b1;
      if (uni_hs && !(b_hs && !mcast_mode)) uni_cnt_q <= uni_cnt_q + 1'b1;
      else if (!uni_hs && b_hs && !mcast_mode) uni_cnt_q <= uni_cnt_q - 1'b1;
      // multicast bookkeeping
      if (commit) begin
        b_select_q <= aw_select;
        mcast_id_q <= slv_aw_i.id;
      end
      if (commit && !(b_hs && mcast_mode)) mcast_cnt_q <= mcast_cnt_q + 1'b1;
      else if (!commit && b_hs && mcast_mode) mcast_cnt_q <= mcast_cnt_q - 1'b1;
    end
  end

  // ---------------------------------------------------------------- checks
  // A master must hold AW valid (and its payload) until it is accepted.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    slv_aw_valid_i && !slv_aw_ready_o |=> slv_aw_valid_i && $stable(slv_aw_i))
    else $error("AW valid dropped or payload changed before handshake");
  // A multicast never shares the ID table with unicasts.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(mcast_cnt_q != '0 && uni_cnt_q != '0))
    else $error("unicast and multicast outstanding at the same time");
endmodule
