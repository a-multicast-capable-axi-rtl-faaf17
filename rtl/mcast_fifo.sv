// Small synchronous FIFO (first-word fall-through) used for ordering state:
// the demux stores the port selection of each accepted AW for routing its W
// beats, the mux stores the index of the master whose W beats come next.
// `full_o`/`empty_o` are registered-state outputs; push and pop may happen in
// the same cycle. Depth must be at least 1.
module mcast_fifo #(
  parameter int unsigned Width = 8,
  parameter int unsigned Depth = 8,
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             push_i,
  input  logic [Width-1:0] data_i,
  input  logic             pop_i,
  output logic [Width-1:0] data_o,
  output logic             full_o,
  output logic             empty_o
);
  logic [Width-1:0] mem_q [Depth];
  logic [PtrW-1:0]  rd_q, wr_q;
  logic [PtrW:0]    cnt_q;

  assign full_o  = (cnt_q == (PtrW+1)'(Depth));
  assign empty_o = (cnt_q == '0);
  assign data_o  = mem_q[rd_q];

  wire do_push = push_i && !full_o;
  wire do_pop  = pop_i && !empty_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < Depth; i++) mem_q[i] <= '0;
    end else begin
      if (do_push) begin
        mem_q[wr_q] <= data_i;
        wr_q <= (int'(wr_q) == Depth - 1) ? '0 : wr_q + 1'b1;
      end
      if (do_pop) rd_q <= (int'(rd_q) == Depth - 1) ? '0 : rd_q + 1'b1;
      if (do_push && !do_pop) cnt_q <= cnt_q + 1'b1;
      else if (do_pop && !do_push) cnt_q <= cnt_q - 1'b1;
    end
  end
endmodule
