// xne_seqmult: sequential shift-and-add multiplier.
//
// Computes p = a * b (W-bit result, truncated) one multiplier bit per cycle,
// used by the controller to derive the microcode read-only registers from the
// register-file values at the start of a job. start_i loads the operands;
// done_o pulses and p_o is valid W cycles later. The paper mentions "simple
// sequential multipliers" for this purpose; the shift-and-add structure is
// this design's choice.
module xne_seqmult #(
  parameter int unsigned W = 32
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         start_i,
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] b_i,
  output logic         busy_o,
  output logic         done_o,
  output logic [W-1:0] p_o
);
  localparam int unsigned CW = $clog2(W + 1);
  logic [W-1:0]  a_q, b_q;
  logic [CW-1:0] cnt_q;

  assign busy_o = (cnt_q != '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_q <= '0; b_q <= '0; p_o <= '0; cnt_q <= '0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (start_i) begin
        a_q   <= a_i;
        b_q   <= b_i;
        p_o   <= '0;
        cnt_q <= CW'(W);
      end else if (busy_o) begin
        if (b_q[0]) p_o <= p_o + a_q;
        a_q   <= a_q << 1;
        b_q   <= b_q >> 1;
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) done_o <= 1'b1;
      end
    end
  end
endmodule
