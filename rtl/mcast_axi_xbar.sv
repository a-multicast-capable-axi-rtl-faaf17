// Multicast-capable N-to-M AXI crossbar (write channels).
//
// Every crossbar slave port (one per master) has a demux, every crossbar master
// port (one per slave) has a mux, and each demux is wired to each mux. An
// address map, given as an input so software can see the same table, assigns
// address intervals to master ports. A write whose AW user field carries a
// non-zero mask addresses a set of locations; if they fall in several master
// ports the write is multicast: its AW and every W beat are delivered to all of
// those slaves (each slave sees only the addresses inside it) and their B
// responses are merged into one. Besides the usual AW/W/B channels, two 1-bit
// signals run from every demux to every mux: is_mcast selects the mux's
// multicast path, and commit makes all muxes of one multicast accept it in the
// same cycle.
//
// Defaults: 16 slave and 16 master ports, the largest crossbar the paper
// evaluates; data width 512 bits (package). Latency through the crossbar is
// one cycle on each of AW, W and B (the mux registers); throughput one beat
// per cycle per port. Only the write path is implemented: reads never multicast
// and would pass through an ordinary crossbar.
module mcast_axi_xbar
  import mcast_axi_pkg::*;
#(
  parameter int unsigned NoSlvPorts    = 16,
  parameter int unsigned NoMstPorts    = 16,
  parameter int unsigned NoAddrRules   = NoMstPorts,
  parameter int unsigned MaxMstTrans   = 8,
  parameter int unsigned MaxMcastTrans = 8,
  parameter int unsigned MaxWTrans     = 8
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  rule_t addr_map_i [NoAddrRules],
  // slave ports (masters connect here)
  input  logic [NoSlvPorts-1:0] slv_aw_valid_i,
  output logic [NoSlvPorts-1:0] slv_aw_ready_o,
  input  aw_t                   slv_aw_i [NoSlvPorts],
  input  logic [NoSlvPorts-1:0] slv_w_valid_i,
  output logic [NoSlvPorts-1:0] slv_w_ready_o,
  input  w_t                    slv_w_i [NoSlvPorts],
  output logic [NoSlvPorts-1:0] slv_b_valid_o,
  input  logic [NoSlvPorts-1:0] slv_b_ready_i,
  output b_t                    slv_b_o [NoSlvPorts],
  // master ports (slaves connect here)
  output logic [NoMstPorts-1:0] mst_aw_valid_o,
  input  logic [NoMstPorts-1:0] mst_aw_ready_i,
  output mst_aw_t               mst_aw_o [NoMstPorts],
  output logic [NoMstPorts-1:0] mst_w_valid_o,
  input  logic [NoMstPorts-1:0] mst_w_ready_i,
  output w_t                    mst_w_o [NoMstPorts],
  input  logic [NoMstPorts-1:0] mst_b_valid_i,
  output logic [NoMstPorts-1:0] mst_b_ready_o,
  input  mst_b_t                mst_b_i [NoMstPorts]
);
  // demux i -> mux j, indexed [i][j]
  logic [NoMstPorts-1:0] d_aw_valid [NoSlvPorts];
  logic [NoMstPorts-1:0] d_aw_ready [NoSlvPorts];
  aw_t                   d_aw       [NoSlvPorts][NoMstPorts];
  logic                  d_is_mcast [NoSlvPorts];
  logic [NoMstPorts-1:0] d_commit   [NoSlvPorts];
  logic [NoMstPorts-1:0] d_w_valid  [NoSlvPorts];
  logic [NoMstPorts-1:0] d_w_ready  [NoSlvPorts];
  w_t                    d_w        [NoSlvPorts];
  logic [NoMstPorts-1:0] d_b_valid  [NoSlvPorts];
  logic [NoMstPorts-1:0] d_b_ready  [NoSlvPorts];
  b_t                    d_b        [NoSlvPorts][NoMstPorts];

  // same nets seen from mux j, indexed [j][i]
  logic [NoSlvPorts-1:0] m_aw_valid [NoMstPorts];
  logic [NoSlvPorts-1:0] m_aw_ready [NoMstPorts];
  aw_t                   m_aw       [NoMstPorts][NoSlvPorts];
  logic [NoSlvPorts-1:0] m_is_mcast [NoMstPorts];
  logic [NoSlvPorts-1:0] m_commit   [NoMstPorts];
  logic [NoSlvPorts-1:0] m_w_valid  [NoMstPorts];
  logic [NoSlvPorts-1:0] m_w_ready  [NoMstPorts];
  w_t                    m_w        [NoMstPorts][NoSlvPorts];
  logic [NoSlvPorts-1:0] m_b_valid  [NoMstPorts];
  logic [NoSlvPorts-1:0] m_b_ready  [NoMstPorts];
  b_t                    m_b        [NoMstPorts];

  for (genvar i = 0; i < NoSlvPorts; i++) begin : gen_cross_i
    for (genvar j = 0; j < NoMstPorts; j++) begin : gen_cross_j
      assign m_aw_valid[j][i] = d_aw_valid[i][j];
      assign d_aw_ready[i][j] = m_aw_ready[j][i];
      assign m_aw[j][i]       = d_aw[i][j];
      assign m_is_mcast[j][i] = d_is_mcast[i];
      assign m_commit[j][i]   = d_commit[i][j];
      assign m_w_valid[j][i]  = d_w_valid[i][j];
      assign d_w_ready[i][j]  = m_w_ready[j][i];
      assign m_w[j][i]        = d_w[i];
      assign d_b_valid[i][j]  = m_b_valid[j][i];
      assign m_b_ready[j][i]  = d_b_ready[i][j];
      assign d_b[i][j]        = m_b[j];
    end
  end

  for (genvar i = 0; i < NoSlvPorts; i++) begin : gen_demux
    mcast_axi_demux #(
      .NoMstPorts    (NoMstPorts),
      .NoRules       (NoAddrRules),
      .MaxTrans      (MaxMstTrans),
      .MaxMcastTrans (MaxMcastTrans),
      .MaxWTrans     (MaxWTrans)
    ) i_demux (
      .clk_i, .rst_ni,
      .addr_map_i        (addr_map_i),
      .slv_aw_valid_i    (slv_aw_valid_i[i]),
      .slv_aw_ready_o    (slv_aw_ready_o[i]),
      .slv_aw_i          (slv_aw_i[i]),
      .slv_w_valid_i     (slv_w_valid_i[i]),
      .slv_w_ready_o     (slv_w_ready_o[i]),
      .slv_w_i           (slv_w_i[i]),
      .slv_b_valid_o     (slv_b_valid_o[i]),
      .slv_b_ready_i     (slv_b_ready_i[i]),
      .slv_b_o           (slv_b_o[i]),
      .mst_aw_valid_o    (d_aw_valid[i]),
      .mst_aw_ready_i    (d_aw_ready[i]),
      .mst_aw_o          (d_aw[i]),
      .mst_aw_is_mcast_o (d_is_mcast[i]),
      .mst_aw_commit_o   (d_commit[i]),
      .mst_w_valid_o     (d_w_valid[i]),
      .mst_w_ready_i     (d_w_ready[i]),
      .mst_w_o           (d_w[i]),
      .mst_b_valid_i     (d_b_valid[i]),
      .mst_b_ready_o     (d_b_ready[i]),
      .mst_b_i           (d_b[i])
    );
  end

  for (genvar j = 0; j < NoMstPorts; j++) begin : gen_mux
    mcast_axi_mux #(
      .NoSlvPorts (NoSlvPorts),
      .MaxWTrans  (MaxWTrans)
    ) i_mux (
      .clk_i, .rst_ni,
      .slv_aw_valid_i    (m_aw_valid[j]),
      .slv_aw_ready_o    (m_aw_ready[j]),
      .slv_aw_i          (m_aw[j]),
      .slv_aw_is_mcast_i (m_is_mcast[j]),
      .slv_aw_commit_i   (m_commit[j]),
      .slv_w_valid_i     (m_w_valid[j]),
      .slv_w_ready_o     (m_w_ready[j]),
      .slv_w_i           (m_w[j]),
      .slv_b_valid_o     (m_b_valid[j]),
      .slv_b_ready_i     (m_b_ready[j]),
      .slv_b_o           (m_b[j]),
      .mst_aw_valid_o    (mst_aw_valid_o[j]),
      .mst_aw_ready_i    (mst_aw_ready_i[j]),
      .mst_aw_o          (mst_aw_o[j]),
      .mst_w_valid_o     (mst_w_valid_o[j]),
      .mst_w_ready_i     (mst_w_ready_i[j]),
      .mst_w_o           (mst_w_o[j]),
      .mst_b_valid_i     (mst_b_valid_i[j]),
      .mst_b_ready_o     (mst_b_ready_o[j]),
      .mst_b_i           (mst_b_i[j])
    );
  end
endmodule
