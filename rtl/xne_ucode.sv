// xne_ucode: microcode processor implementing the outer loops of a layer.
//
// The processor keeps NLOOPS loop indices and NRW read/write registers
// (W, x, y, x_major: memory offsets of weights, inputs, outputs and of the
// current input window). Loop 0 is the innermost (input-feature tiles), loop
// 5 the outermost (output rows). Each step_i moves to the next inner-loop
// iteration: the innermost loop l whose index has not reached ranges_i[l]-1 is
// incremented, every loop inside it returns to 0, and then the micro-
// instructions attached to loop l run one per cycle (busy_o high). Each loop
// has a one-byte descriptor {nb_ops[2:0], base[4:0]} pointing into a table of
// one-byte instructions {op, out[1:0], in_rw, in[3:0]}:
//   ADD: rw[out] <= rw[out] + src      MV: rw[out] <= src
// where src is rw[in[1:0]] when in_rw is set, otherwise the read-only
// register ro_i[in]. When every index is at its end, last_o is high and a
// step only sets finished_o. clear_i resets indices, registers and flags.
//
// From the paper: four R/W and sixteen R/O registers, the ADD/MV imperative
// instructions, a declarative LOOP entry per loop holding the base address
// and number of instructions, a single-stage pipeline. The bit encodings,
// the step rule and taking loop ranges from an input are this design's.
module xne_ucode
  import xne_pkg::*;
(
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clear_i,
  input  logic             step_i,
  input  uc_instr_t        code_i   [NSLOTS],
  input  uc_loop_t         loops_i  [NLOOPS],
  input  logic [IDX_W-1:0] ranges_i [NLOOPS],
  input  logic [31:0]      ro_i     [NRO],
  output logic [31:0]      rw_o     [NRW],
  output logic [IDX_W-1:0] idx_o    [NLOOPS],
  output logic [NLOOPS-1:0] at_end_o,
  output logic             last_o,
  output logic             busy_o,
  output logic             finished_o
);
  logic [4:0] pc_q;
  logic [2:0] left_q;
  logic [2:0] lsel;      // loop that the next step increments
  logic       lfound;

  for (genvar l = 0; l < NLOOPS; l++) begin : g_end
    assign at_end_o[l] = (idx_o[l] + 1'b1 >= ranges_i[l]);
  end
  assign last_o = &at_end_o;
  assign busy_o = (left_q != '0);

  // "next loop" logic: innermost loop not at its end
  always_comb begin
    lsel   = '0;
    lfound = 1'b0;
    for (int l = NLOOPS - 1; l >= 0; l--) begin
      if (!at_end_o[l]) begin
        lsel   = 3'(l);
        lfound = 1'b1;
      end
    end
  end

  uc_instr_t   ins;
  logic [31:0] src;
  assign ins = code_i[pc_q];
  assign src = ins.in_rw ? rw_o[ins.in[1:0]] : ro_i[ins.in];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pc_q       <= '0;
      left_q     <= '0;
      finished_o <= 1'b0;
      for (int r = 0; r < NRW; r++)    rw_o[r]  <= '0;
      for (int l = 0; l < NLOOPS; l++) idx_o[l] <= '0;
    end else if (clear_i) begin
      pc_q       <= '0;
      left_q     <= '0;
      finished_o <= 1'b0;
      for (int r = 0; r < NRW; r++)    rw_o[r]  <= '0;
      for (int l = 0; l < NLOOPS; l++) idx_o[l] <= '0;
    end else if (busy_o) begin
      // execute one micro-instruction per cycle
      rw_o[ins.out] <= (ins.op == UC_ADD) ? rw_o[ins.out] + src : src;
      pc_q          <= pc_q + 1'b1;
      left_q        <= left_q - 1'b1;
    end else if (step_i) begin
      if (lfound) begin
        for (int l = 0; l < NLOOPS; l++) begin
          if (l < int'(lsel))       idx_o[l] <= '0;
          else if (l == int'(lsel)) idx_o[l] <= idx_o[l] + 1'b1;
        end
        pc_q   <= loops_i[lsel].base;
        left_q <= loops_i[lsel].nb_ops;
      end else begin
        finished_o <= 1'b1;
      end
    end
  end

  a_no_step_busy: assert property (@(posedge clk_i) disable iff (!rst_ni) step_i |-> !busy_o);
endmodule
