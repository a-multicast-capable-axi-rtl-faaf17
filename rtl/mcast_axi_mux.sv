// Multicast-capable AXI write multiplexer: one per crossbar master port
// (i.e. per connected slave).
//
// AW arbitration has two datapaths. Unicast requests go through a round-robin
// arbiter and are taken as soon as the output can accept them. Multicast
// requests take precedence over unicasts (they have stricter ordering needs):
// among the masters offering a multicast, the lowest-numbered one is offered
// `ready` (priority encoder), and the request is only taken in the cycle in
// which that master's demux raises `commit`, i.e. when every mux its multicast
// addresses has offered ready to it at the same time. Because every mux picks
// with the same fixed priority, the globally highest-priority multicast always
// obtains all its muxes, so no two multicasts can each hold part of the other's
// ports, which would otherwise deadlock on the W channel.
//
// The accepted AW leaves through a pipeline register with its ID extended by
// the index of the slave port it came from. The same index is queued so that
// W beats are taken from the masters in AW order. B responses are routed back
// to the slave port named in the upper ID bits, which are then stripped.
//
// Timing: AW, W and B each pass one register (spill register), so the mux adds
// one cycle per channel and sustains one beat per cycle. All ready signals
// it gives to the demuxes are functions of registered state and the requests,
// never of downstream ready. The registers and the W queue depth (MaxWTrans)
// are this design's choices.
module mcast_axi_mux
  import mcast_axi_pkg::*;
#(
  parameter int unsigned NoSlvPorts = 16,
  parameter int unsigned MaxWTrans  = 8,
  localparam int unsigned IdxW = (NoSlvPorts > 1) ? $clog2(NoSlvPorts) : 1
) (
  input  logic clk_i,
  input  logic rst_ni,
  // slave ports (from the demuxes)
  input  logic [NoSlvPorts-1:0] slv_aw_valid_i,
  output logic [NoSlvPorts-1:0] slv_aw_ready_o,
  input  aw_t                   slv_aw_i [NoSlvPorts],
  input  logic [NoSlvPorts-1:0] slv_aw_is_mcast_i,
  input  logic [NoSlvPorts-1:0] slv_aw_commit_i,
  input  logic [NoSlvPorts-1:0] slv_w_valid_i,
  output logic [NoSlvPorts-1:0] slv_w_ready_o,
  input  w_t                    slv_w_i [NoSlvPorts],
  output logic [NoSlvPorts-1:0] slv_b_valid_o,
  input  logic [NoSlvPorts-1:0] slv_b_ready_i,
  output b_t                    slv_b_o,
  // master port (towards the slave)
  output logic    mst_aw_valid_o,
  input  logic    mst_aw_ready_i,
  output mst_aw_t mst_aw_o,
  output logic    mst_w_valid_o,
  input  logic    mst_w_ready_i,
  output w_t      mst_w_o,
  input  logic    mst_b_valid_i,
  output logic    mst_b_ready_o,
  input  mst_b_t  mst_b_i
);
  initial begin
    if (IdxW > SlvIdxWidth) $fatal(1, "NoSlvPorts does not fit in the ID extension");
  end

  // ---------------------------------------------------------------- AW
  logic [NoSlvPorts-1:0] mc_req, uni_req, uni_gnt;
  logic [IdxW-1:0]       mc_idx, uni_idx, sel_idx;
  logic                  any_mc, uni_valid, can_accept, aw_load;
  logic                  aw_spill_ready, w_fifo_full, w_fifo_empty;
  mst_aw_t               aw_out;

  assign mc_req  = slv_aw_valid_i & slv_aw_is_mcast_i;
  assign uni_req = slv_aw_valid_i & ~slv_aw_is_mcast_i;
  assign any_mc  = (mc_req != '0);

  mcast_lzc #(.Width(NoSlvPorts)) i_mc_lzc (.in_i(mc_req), .idx_o(mc_idx), .empty_o());

  mcast_rr_arb #(.N(NoSlvPorts)) i_uni_arb (
    .clk_i, .rst_ni,
    .req_i   (any_mc ? '0 : uni_req),
    .ack_i   (aw_load),
    .gnt_o   (uni_gnt),
    .idx_o   (uni_idx),
    .valid_o (uni_valid)
  );

  assign can_accept = aw_spill_ready && !w_fifo_full;
  assign sel_idx    = any_mc ? mc_idx : uni_idx;
  assign aw_load    = can_accept && (any_mc ? slv_aw_commit_i[mc_idx] : uni_valid);

  always_comb begin
    slv_aw_ready_o = '0;
    if (can_accept) begin
      if (any_mc) slv_aw_ready_o[mc_idx] = 1'b1;
      else        slv_aw_ready_o = uni_gnt;
    end
    aw_out       = '{id: {SlvIdxWidth'(sel_idx), slv_aw_i[sel_idx].id},
                     addr: slv_aw_i[sel_idx].addr, mask: slv_aw_i[sel_idx].mask,
                     len: slv_aw_i[sel_idx].len, size: slv_aw_i[sel_idx].size,
                     burst: slv_aw_i[sel_idx].burst, lock: slv_aw_i[sel_idx].lock};
  end

  mcast_spill_reg #(.Width($bits(mst_aw_t))) i_aw_reg (
    .clk_i, .rst_ni,
    .in_valid_i  (aw_load),
    .in_ready_o  (aw_spill_ready),
    .in_data_i   (aw_out),
    .out_valid_o (mst_aw_valid_o),
    .out_ready_i (mst_aw_ready_i),
    .out_data_o  (mst_aw_o)
  );

  // ---------------------------------------------------------------- W
  logic [IdxW-1:0] w_idx;
  logic            w_spill_ready, w_in_valid;

  mcast_fifo #(.Width(IdxW), .Depth(MaxWTrans)) i_w_fifo (
    .clk_i, .rst_ni,
    .push_i  (aw_load),
    .data_i  (sel_idx),
    .pop_i   (w_in_valid && w_spill_ready && slv_w_i[w_idx].last),
    .data_o  (w_idx),
    .full_o  (w_fifo_full),
    .empty_o (w_fifo_empty)
  );

  assign w_in_valid = !w_fifo_empty && slv_w_valid_i[w_idx];
  always_comb begin
    slv_w_ready_o = '0;
    slv_w_ready_o[w_idx] = !w_fifo_empty && w_spill_ready;
  end

  mcast_spill_reg #(.Width($bits(w_t))) i_w_reg (
    .clk_i, .rst_ni,
    .in_valid_i  (w_in_valid),
    .in_ready_o  (w_spill_ready),
    .in_data_i   (slv_w_i[w_idx]),
    .out_valid_o (mst_w_valid_o),
    .out_ready_i (mst_w_ready_i),
    .out_data_o  (mst_w_o)
  );

  // ---------------------------------------------------------------- B
  logic   b_valid, b_ready;
  mst_b_t b_q;
  logic [IdxW-1:0] b_idx;

  mcast_spill_reg #(.Width($bits(mst_b_t))) i_b_reg (
    .clk_i, .rst_ni,
    .in_valid_i  (mst_b_valid_i),
    .in_ready_o  (mst_b_ready_o),
    .in_data_i   (mst_b_i),
    .out_valid_o (b_valid),
    .out_ready_i (b_ready),
    .out_data_o  (b_q)
  );

  assign b_idx   = IdxW'(b_q.id[IdWidth +: SlvIdxWidth]);
  assign slv_b_o = '{id: b_q.id[IdWidth-1:0], resp: b_q.resp};
  assign b_ready = slv_b_ready_i[b_idx];
  always_comb begin
    slv_b_valid_o = '0;
    slv_b_valid_o[b_idx] = b_valid;
  end

  // ---------------------------------------------------------------- checks
  // A multicast is only committed to the master this mux offered ready to.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (slv_aw_commit_i & ~slv_aw_ready_o) == '0)
    else $error("commit without ready");
  // The slave must hold B valid until accepted.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    mst_b_valid_i && !mst_b_ready_o |=> mst_b_valid_i)
    else $error("B valid dropped before handshake");
endmodule
