// Two-entry pipeline register (skid buffer) for a valid/ready stream.
//
// Cuts every combinational path between its two sides: `in_ready_o` and
// `out_valid_o` come straight from flip-flops, yet it sustains one beat per
// cycle. Data leaves in arrival order with one cycle of latency. Helper of the
// crossbar mux, which places one on each of its output channels; the
// registered ready is what lets the multicast commit and the W fork be built
// without combinational loops through the slaves.
module mcast_spill_reg #(
  parameter int unsigned Width = 8
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  logic [Width-1:0] in_data_i,
  output logic             out_valid_o,
  input  logic             out_ready_i,
  output logic [Width-1:0] out_data_o
);
  // a: output stage, b: skid stage (filled only when a is full and stalled)
  logic             a_full_q, b_full_q;
  logic [Width-1:0] a_data_q, b_data_q;

  wire in_hs  = in_valid_i && in_ready_o;
  wire out_hs = out_valid_o && out_ready_i;

  assign in_ready_o  = !b_full_q;
  assign out_valid_o = a_full_q;
  assign out_data_o  = a_data_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_full_q <= 1'b0;
      b_full_q <= 1'b0;
      a_data_q <= '0;
      b_data_q <= '0;
    end else begin
      if (b_full_q) begin
        // b only drains into a
        if (out_hs) begin
          a_data_q <= b_data_q;
          b_full_q <= 1'b0;
        end
      end else if (in_hs) begin
        if (!a_full_q || out_hs) begin
          a_data_q <= in_data_i;
          a_full_q <= 1'b1;
        end else begin
          b_data_q <= in_data_i;
          b_full_q <= 1'b1;
        end
      end else if (out_hs) begin
        a_full_q <= 1'b0;
      end
    end
  end
endmodule
