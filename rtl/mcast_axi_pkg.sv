// Shared constants and channel types of the multicast-capable AXI crossbar.
//
// Only the write path of AXI4 (AW, W and B channels) is modelled: multicast
// concerns writes only. A multi-address is carried as an ordinary AW address
// plus a mask of the same width in the AW user field: every mask bit set to 1
// turns the corresponding address bit into a "don't care", so n set mask bits
// address 2^n locations.
//
// Widths: AddrWidth = 48 and IdWidth = 4 are this design's choices; DataWidth =
// 512 is the width of the wide (DMA) network of the accelerator the crossbar is
// used in. Each crossbar master port prepends the index of the slave port a
// transaction came from to its ID (SlvIdxWidth bits, enough for 16 ports), so
// that B responses can be routed back.
package mcast_axi_pkg;

  localparam int unsigned AddrWidth   = 48;
  localparam int unsigned DataWidth   = 512;
  localparam int unsigned StrbWidth   = DataWidth / 8;
  localparam int unsigned IdWidth     = 4;   // ID width at the crossbar slave ports
  localparam int unsigned SlvIdxWidth = 4;   // bits prepended by a mux (up to 16 slave ports)
  localparam int unsigned MstIdWidth  = IdWidth + SlvIdxWidth;

  typedef logic [AddrWidth-1:0]  addr_t;
  typedef logic [DataWidth-1:0]  data_t;
  typedef logic [StrbWidth-1:0]  strb_t;
  typedef logic [IdWidth-1:0]    id_t;
  typedef logic [MstIdWidth-1:0] mst_id_t;

  // AXI B response codes.
  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } resp_e;

  // AW channel as seen at the crossbar slave ports (towards the masters).
  // `mask` is the AW user signal carrying the multicast mask.
  typedef struct packed {
    id_t        id;
    addr_t      addr;
    addr_t      mask;
    logic [7:0] len;
    logic [2:0] size;
    logic [1:0] burst;
    logic       lock;
  } aw_t;

  // AW channel at the crossbar master ports (ID extended by the slave port index).
  typedef struct packed {
    mst_id_t    id;
    addr_t      addr;
    addr_t      mask;
    logic [7:0] len;
    logic [2:0] size;
    logic [1:0] burst;
    logic       lock;
  } mst_aw_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
  } w_t;

  typedef struct packed {
    id_t   id;
    resp_e resp;
  } b_t;

  typedef struct packed {
    mst_id_t id;
    resp_e   resp;
  } mst_b_t;

  // One rule of the address map in interval form: [start_addr, end_addr)
  // belongs to master port `idx`. Multicast-targetable rules must be a power of
  // two in size and aligned to their size.
  typedef struct packed {
    logic [31:0] idx;
    addr_t       start_addr;
    addr_t       end_addr;
  } rule_t;

endpackage
