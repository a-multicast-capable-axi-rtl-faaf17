// Priority encoder ("leading/trailing zero counter"): returns the index of the
// lowest set bit of `in_i`, and `empty_o` when no bit is set.
//
// The crossbar uses it where every copy of a decision must agree: each mux
// picks the lowest-indexed requesting master for a multicast, so that all muxes
// addressed by a multicast select the same master, and the demux takes the ID of
// a joined multicast B response from the lowest-indexed addressed port.
// Purely combinational. The counting direction (lowest index first) is this
// design's choice; only consistency across muxes is required.
module mcast_lzc #(
  parameter int unsigned Width = 16,
  localparam int unsigned IdxW = (Width > 1) ? $clog2(Width) : 1
) (
  input  logic [Width-1:0] in_i,
  output logic [IdxW-1:0]  idx_o,
  output logic             empty_o
);
  always_comb begin
    idx_o = '0;
    for (int i = Width - 1; i >= 0; i--) begin
      if (in_i[i]) idx_o = IdxW'(i);
    end
  end
  assign empty_o = (in_i == '0);
endmodule
