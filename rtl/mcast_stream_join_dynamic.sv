// Dynamic stream join: completes one output handshake only once every input
// stream selected by `sel_i` holds a valid beat, and then acknowledges all of
// them in the same cycle.
//
// The demux uses it to merge the B responses of a multicast: one response is
// expected from every addressed crossbar master port, and only one is passed
// back to the master. Unselected inputs are never acknowledged. Purely
// combinational; `oup_valid_o` is low while `sel_i` is empty.
module mcast_stream_join_dynamic #(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0] inp_valid_i,
  output logic [N-1:0] inp_ready_o,
  input  logic [N-1:0] sel_i,
  output logic         oup_valid_o,
  input  logic         oup_ready_i
);
  assign oup_valid_o = (sel_i != '0) && ((inp_valid_i | ~sel_i) == '1);
  assign inp_ready_o = (oup_valid_o && oup_ready_i) ? sel_i : '0;
endmodule
