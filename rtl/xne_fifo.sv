// xne_fifo: small valid/ready FIFO used between the streamer and the engine.
//
// The engine receives its feature and weight/threshold streams through these
// queues and sends its output stream through one (the "latch FIFO" and
// "latch buffer" of the architecture). DEPTH entries of WIDTH bits; a word
// written in cycle t can be read in cycle t+1 (no fall-through). in_ready is
// high while the FIFO is not full, out_valid while it is not empty; a push and
// a pop may happen in the same cycle. The paper builds these from latches and
// uses 2 entries for features/outputs and 4 for weights; here the storage is a
// flip-flop array, which is this design's choice.
module xne_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 2
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clear_i,
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  logic [WIDTH-1:0] in_data_i,
  output logic             out_valid_o,
  input  logic             out_ready_i,
  output logic [WIDTH-1:0] out_data_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [PW-1:0]    rd_q, wr_q;
  logic [PW:0]      cnt_q;
  logic             push, pop;

  assign in_ready_o  = (cnt_q != (PW+1)'(DEPTH));
  assign out_valid_o = (cnt_q != '0);
  assign out_data_o  = mem_q[rd_q];
  assign push = in_valid_i && in_ready_o;
  assign pop  = out_valid_o && out_ready_i;

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else if (clear_i) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= incr(wr_q);
      if (pop)  rd_q <= incr(rd_q);
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_q] <= in_data_i;
  end

  // occupancy can never exceed the depth
  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                  cnt_q <= (PW+1)'(DEPTH));
endmodule
