// Round-robin arbiter for the unicast AW requests of a crossbar mux.
//
// Grants one of the requests in `req_i` (one-hot `gnt_o`, index `idx_o`),
// searching from the position after the last granted request. The priority
// pointer only advances when the granted request is accepted (`ack_i`), so a
// pending grant is stable while the output cannot take it. One cycle of state
// (the pointer); the grant is combinational. The paper names a round-robin
// arbiter; this implementation is the usual rotating-priority one.
module mcast_rr_arb #(
  parameter int unsigned N = 16,
  localparam int unsigned IdxW = (N > 1) ? $clog2(N) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [N-1:0]    req_i,
  input  logic            ack_i,
  output logic [N-1:0]    gnt_o,
  output logic [IdxW-1:0] idx_o,
  output logic            valid_o
);
  logic [IdxW-1:0] ptr_q;

  always_comb begin
    logic found;
    logic [IdxW-1:0] k;
    found = 1'b0;
    idx_o = '0;
    for (int unsigned i = 0; i < N; i++) begin
      k = IdxW'((int'(ptr_q) + i) % N);
      if (!found && req_i[k]) begin
        found = 1'b1;
        idx_o = k;
      end
    end
    valid_o = found;
    gnt_o   = found ? (N'(1) << idx_o) : '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (valid_o && ack_i) ptr_q <= (int'(idx_o) == N - 1) ? '0 : idx_o + 1'b1;
  end
endmodule
