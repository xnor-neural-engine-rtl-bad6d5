// xne_regfile: memory-mapped register file of the XNE, APB target.
//
// Two groups of registers. Generic registers hold the microcode (32
// instruction bytes at 0x10-0x2C, six loop descriptor bytes at 0x30-0x34) and
// are kept across jobs. Job registers (base pointers of weights, inputs,
// outputs and thresholds, nif, nof, fs, w_out, h_out, S_tau at 0x40-0x64)
// exist in two copies (contexts): the host always writes the "write context"
// while the engine runs the "run context", so a second job can be queued
// while the first one executes. Writing any value to TRIGGER (0x00) marks the
// write context as pending and moves the write pointer to the other context;
// a trigger with both contexts pending is ignored. STATUS (0x04) reads
// {busy, pending[1:0]}. job_done_i (from the controller, at the end of a job)
// frees the run context and moves the run pointer.
//
// APB: zero wait states (pready=1), no error responses; a write takes effect
// in the cycle psel && penable && pwrite. Reads of job registers return the
// write context.
//
// From the paper: APB target, generic vs duplicated job-dependent registers,
// microcode stored in the generic part. Own choices: register map, trigger
// and status scheme, flip-flops instead of the paper's latch-based standard
// cell memory.
module xne_regfile
  import xne_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // APB target
  input  logic        psel_i,
  input  logic        penable_i,
  input  logic        pwrite_i,
  input  logic [31:0] paddr_i,
  input  logic [31:0] pwdata_i,
  output logic [31:0] prdata_o,
  output logic        pready_o,
  output logic        pslverr_o,
  // to the controller
  output uc_instr_t   code_o  [NSLOTS],
  output uc_loop_t    loops_o [NLOOPS],
  output job_t        job_o,
  output logic        job_valid_o,
  input  logic        job_done_i
);
  logic [7:0]  code_q [NSLOTS];
  logic [7:0]  loops_q [8];
  job_t        ctx_q [2];
  logic [1:0]  valid_q;
  logic        wr_ptr_q, rd_ptr_q;
  logic        wr;
  logic [7:0]  a, uoff;

  assign a         = paddr_i[7:0];
  assign uoff      = a - REG_UCODE0;   // byte offset into the microcode table
  assign wr        = psel_i && penable_i && pwrite_i;
  assign pready_o  = 1'b1;
  assign pslverr_o = 1'b0;

  for (genvar s = 0; s < NSLOTS; s++) begin : g_code
    assign code_o[s] = uc_instr_t'(code_q[s]);
  end
  for (genvar l = 0; l < NLOOPS; l++) begin : g_loops
    assign loops_o[l] = uc_loop_t'(loops_q[l]);
  end

  assign job_o       = ctx_q[rd_ptr_q];
  assign job_valid_o = valid_q[rd_ptr_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int s = 0; s < NSLOTS; s++) code_q[s] <= '0;
      for (int l = 0; l < 8; l++)      loops_q[l] <= '0;
      ctx_q[0] <= '0;
      ctx_q[1] <= '0;
      valid_q  <= '0;
      wr_ptr_q <= 1'b0;
      rd_ptr_q <= 1'b0;
    end else begin
      if (job_done_i) begin
        valid_q[rd_ptr_q] <= 1'b0;
        rd_ptr_q          <= ~rd_ptr_q;
      end
      if (wr) begin
        if (a == REG_TRIGGER) begin
          if (!valid_q[wr_ptr_q] || (job_done_i && wr_ptr_q == rd_ptr_q)) begin
            valid_q[wr_ptr_q] <= 1'b1;
            wr_ptr_q          <= ~wr_ptr_q;
          end
        end else if (a >= REG_UCODE0 && a < REG_LOOPS0) begin
          for (int b = 0; b < 4; b++) code_q[{uoff[4:2], 2'(b)}] <= pwdata_i[8*b +: 8];
        end else if (a == REG_LOOPS0 || a == REG_LOOPS0 + 8'h4) begin
          for (int b = 0; b < 4; b++) loops_q[{a[2], 2'(b)}] <= pwdata_i[8*b +: 8];
        end else begin
          unique case (a)
            REG_W_BASE:   ctx_q[wr_ptr_q].w_base   <= pwdata_i;
            REG_X_BASE:   ctx_q[wr_ptr_q].x_base   <= pwdata_i;
            REG_Y_BASE:   ctx_q[wr_ptr_q].y_base   <= pwdata_i;
            REG_THR_BASE: ctx_q[wr_ptr_q].thr_base <= pwdata_i;
            REG_NIF:      ctx_q[wr_ptr_q].nif      <= pwdata_i[IDX_W-1:0];
            REG_NOF:      ctx_q[wr_ptr_q].nof      <= pwdata_i[IDX_W-1:0];
            REG_FS:       ctx_q[wr_ptr_q].fs       <= pwdata_i[IDX_W-1:0];
            REG_W_OUT:    ctx_q[wr_ptr_q].w_out    <= pwdata_i[IDX_W-1:0];
            REG_H_OUT:    ctx_q[wr_ptr_q].h_out    <= pwdata_i[IDX_W-1:0];
            REG_S_TAU:    ctx_q[wr_ptr_q].s_tau    <= pwdata_i[STAU_W-1:0];
            default: ;
          endcase
        end
      end
    end
  end

  always_comb begin
    prdata_o = '0;
    if (a >= REG_UCODE0 && a < REG_LOOPS0) begin
      for (int b = 0; b < 4; b++) prdata_o[8*b +: 8] = code_q[{uoff[4:2], 2'(b)}];
    end else if (a == REG_LOOPS0 || a == REG_LOOPS0 + 8'h4) begin
      for (int b = 0; b < 4; b++) prdata_o[8*b +: 8] = loops_q[{a[2], 2'(b)}];
    end else begin
      unique case (a)
        REG_STATUS:   prdata_o = {29'b0, valid_q[rd_ptr_q], 2'(valid_q[0]) + 2'(valid_q[1])};
        REG_W_BASE:   prdata_o = ctx_q[wr_ptr_q].w_base;
        REG_X_BASE:   prdata_o = ctx_q[wr_ptr_q].x_base;
        REG_Y_BASE:   prdata_o = ctx_q[wr_ptr_q].y_base;
        REG_THR_BASE: prdata_o = ctx_q[wr_ptr_q].thr_base;
        REG_NIF:      prdata_o = 32'(ctx_q[wr_ptr_q].nif);
        REG_NOF:      prdata_o = 32'(ctx_q[wr_ptr_q].nof);
        REG_FS:       prdata_o = 32'(ctx_q[wr_ptr_q].fs);
        REG_W_OUT:    prdata_o = 32'(ctx_q[wr_ptr_q].w_out);
        REG_H_OUT:    prdata_o = 32'(ctx_q[wr_ptr_q].h_out);
        REG_S_TAU:    prdata_o = 32'(ctx_q[wr_ptr_q].s_tau);
        default:      prdata_o = '0;
      endcase
    end
  end

  a_apb_setup: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                psel_i && !penable_i |=> psel_i && penable_i);
endmodule
