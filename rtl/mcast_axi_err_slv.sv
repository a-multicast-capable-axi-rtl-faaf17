// Error slave of a crossbar demux: terminates write transactions whose address
// hits no rule of the address map.
//
// It accepts one AW at a time, swallows its W beats up to the one flagged
// `last`, and answers with a DECERR B response carrying the transaction's ID.
// A multicast whose addresses miss the whole map is sent here as a unicast.
// The paper does not describe decode errors; this follows the usual behaviour
// of an AXI crossbar. AW is accepted in the cycle it arrives when idle; the B
// response is issued the cycle after the last W beat.
module mcast_axi_err_slv
  import mcast_axi_pkg::*;
(
  input  logic clk_i,
  input  logic rst_ni,
  input  logic aw_valid_i,
  output logic aw_ready_o,
  input  id_t  aw_id_i,
  input  logic w_valid_i,
  output logic w_ready_o,
  input  logic w_last_i,
  output logic b_valid_o,
  input  logic b_ready_i,
  output b_t   b_o
);
  typedef enum logic [1:0] {IDLE, DATA, RESP} state_e;
  state_e state_q;
  id_t    id_q;

  assign aw_ready_o = (state_q == IDLE);
  assign w_ready_o  = (state_q == DATA);
  assign b_valid_o  = (state_q == RESP);
  assign b_o        = '{id: id_q, resp: RESP_DECERR};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      id_q    <= '0;
    end else begin
      unique case (state_q)
        IDLE: if (aw_valid_i) begin
          id_q    <= aw_id_i;
          state_q <= DATA;
        end
        DATA: if (w_valid_i && w_last_i) state_q <= RESP;
        RESP: if (b_ready_i) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
