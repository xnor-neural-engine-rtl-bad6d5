// xne_controller: register file, microcode processor and central FSM.
//
// For every job taken from the register file the controller first derives
// the microcode read-only registers (two of them with sequential multipliers)
// and the six loop ranges {ceil(nif/TP), fs, fs, ceil(nof/TP), w_out, h_out}.
// It then runs one iteration of the hardwired inner loop per microcode step:
//   feature loading  - the feature source reads one TP-bit vector at
//                      x_base + x while the microcode processor already
//                      computes the offsets of the next iteration;
//   accumulation     - the weight source streams n_acc = min(TP,nof) weight
//                      vectors from w_base + W into the engine;
//   thresholding     - only after the last input tile of an output tile
//                      (loops 0..2 at their end): ceil(8*n_acc/TP) threshold
//                      vectors from thr_base + k_out_major*TP are streamed,
//                      the engine binarizes, and the sink writes n_acc/32
//                      words to y_base + y.
// After the last iteration evt_o pulses for one cycle and the job's register
// context is released. The two static muxes of the streamer are switched so
// that only one address generator uses the memory ports at a time.
//
// From the paper: controller = register file + FSM + microcode processor,
// the three phases and their order, the overlap of index update with the
// feature load, reuse of a feature vector over min(TP,nof) cycles, the event
// wire. Own choices: read-only register contents, memory layout (see the
// package), stride 1 without padding, nif/nof multiples of 32 that are <= TP
// or multiples of TP.
module xne_controller
  import xne_pkg::*;
#(
  parameter int unsigned TP = 128
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // APB target
  input  logic             psel_i,
  input  logic             penable_i,
  input  logic             pwrite_i,
  input  logic [31:0]      paddr_i,
  input  logic [31:0]      pwdata_i,
  output logic [31:0]      prdata_o,
  output logic             pready_o,
  output logic             pslverr_o,
  output logic             evt_o,
  // engine
  output logic             eng_cmd_valid_o,
  input  logic             eng_cmd_ready_i,
  output eng_cmd_t         eng_cmd_o,
  output logic [STAU_W-1:0] s_tau_o,
  input  logic             eng_done_i,
  // streamer
  output logic             src_sel_o,
  output logic             snk_sel_o,
  output logic             feat_start_o,
  output logic [31:0]      feat_base_o,
  input  logic             feat_done_i,
  output logic             wt_start_o,
  output logic [31:0]      wt_base_o,
  output logic [IDX_W-1:0] wt_nvec_o,
  input  logic             wt_done_i,
  output logic             snk_start_o,
  output logic [31:0]      snk_base_o,
  output logic [IDX_W-1:0] snk_nwords_o,
  input  logic             snk_done_i
);
  localparam int unsigned TPB = TP / 8;   // bytes per TP-bit vector
  localparam int unsigned LTP = $clog2(TP);

  // ------------------------------------------------------------ register file
  uc_instr_t   code  [NSLOTS];
  uc_loop_t    loops [NLOOPS];
  job_t        job;
  logic        job_valid, job_done;

  xne_regfile i_regfile (
    .clk_i, .rst_ni, .psel_i, .penable_i, .pwrite_i, .paddr_i, .pwdata_i,
    .prdata_o, .pready_o, .pslverr_o,
    .code_o(code), .loops_o(loops), .job_o(job), .job_valid_o(job_valid),
    .job_done_i(job_done)
  );

  // ------------------------------------------------------------ derived values
  logic [IDX_W-1:0] n_acc, n_in, n_thr;
  logic [31:0]      nif_b, nof_b, tpx_b, tpy_b;
  assign n_acc = (job.nof < IDX_W'(TP)) ? job.nof : IDX_W'(TP);
  assign n_in  = (job.nif < IDX_W'(TP)) ? job.nif : IDX_W'(TP);
  assign n_thr = (n_acc + IDX_W'(TPB) - 1'b1) / IDX_W'(TPB);
  assign nif_b = 32'(job.nif) >> 3;
  assign nof_b = 32'(job.nof) >> 3;
  assign tpx_b = 32'(n_in) >> 3;
  assign tpy_b = 32'(n_acc) >> 3;

  logic        mul_start, rowskip_done, fsnif_done, rowskip_busy, fsnif_busy;
  logic [31:0] rowskip_p, fsnif_p;
  logic        rowskip_ok_q, fsnif_ok_q;

  xne_seqmult #(.W(32)) i_mul_rowskip (
    .clk_i, .rst_ni, .start_i(mul_start), .a_i(32'(job.w_out) - 1), .b_i(nif_b),
    .busy_o(rowskip_busy), .done_o(rowskip_done), .p_o(rowskip_p)
  );
  xne_seqmult #(.W(32)) i_mul_fsnif (
    .clk_i, .rst_ni, .start_i(mul_start), .a_i(32'(job.fs)), .b_i(nif_b),
    .busy_o(fsnif_busy), .done_o(fsnif_done), .p_o(fsnif_p)
  );

  logic [IDX_W-1:0] ranges [NLOOPS];
  logic [31:0]      ro [NRO];
  always_comb begin
    for (int r = 0; r < NRO; r++) ro[r] = '0;
    ro[RO_TPSQ]    = 32'(n_acc) * TPB;
    ro[RO_TPX]     = tpx_b;
    ro[RO_NIF]     = nif_b;
    ro[RO_NOF]     = nof_b;
    ro[RO_ROWSKIP] = rowskip_p + tpx_b;
    ro[RO_FSNIF]   = fsnif_p;
    ro[RO_TPY]     = tpy_b;
    for (int l = 0; l < NLOOPS; l++) ro[RO_RANGE0 + l] = 32'(ranges[l]);
  end

  assign ranges[0] = (job.nif + IDX_W'(TP - 1)) >> LTP;
  assign ranges[1] = job.fs;
  assign ranges[2] = job.fs;
  assign ranges[3] = (job.nof + IDX_W'(TP - 1)) >> LTP;
  assign ranges[4] = job.w_out;
  assign ranges[5] = job.h_out;

  // ------------------------------------------------------------ microcode
  logic             uc_clear, uc_step, uc_last, uc_busy, uc_finished;
  logic [31:0]      rw  [NRW];
  logic [IDX_W-1:0] idx [NLOOPS];
  logic [NLOOPS-1:0] at_end;

  xne_ucode i_ucode (
    .clk_i, .rst_ni, .clear_i(uc_clear), .step_i(uc_step),
    .code_i(code), .loops_i(loops), .ranges_i(ranges), .ro_i(ro),
    .rw_o(rw), .idx_o(idx), .at_end_o(at_end), .last_o(uc_last),
    .busy_o(uc_busy), .finished_o(uc_finished)
  );

  // ------------------------------------------------------------ FSM
  typedef enum logic [3:0] {
    S_IDLE, S_PREP, S_FEAT, S_FEAT_W, S_ACC, S_THR, S_THR_W, S_OUT, S_NEXT, S_DONE
  } state_e;
  state_e state_q;

  logic [31:0]      cur_w_q, cur_y_q;
  logic [IDX_W-1:0] cur_kom_q;
  logic             tile_end_q, job_end_q;
  logic             wt_ok_q, eng_ok_q, snk_ok_q;
  logic             src_sel_q, snk_sel_q;

  assign src_sel_o = src_sel_q;
  assign snk_sel_o = snk_sel_q;
  assign s_tau_o   = job.s_tau;
  assign job_done  = (state_q == S_DONE);
  assign evt_o     = (state_q == S_DONE);
  assign uc_clear  = (state_q == S_IDLE) && job_valid;
  assign mul_start = uc_clear;

  // engine command
  assign eng_cmd_valid_o = (state_q == S_FEAT) || (state_q == S_THR);
  assign eng_cmd_o.op    = (state_q == S_THR) ? ENG_THRESH : ENG_ACCUM;
  assign eng_cmd_o.n_acc = n_acc;
  assign eng_cmd_o.n_in  = n_in;

  // streamer jobs
  logic feat_go, thr_go;
  assign feat_go      = (state_q == S_FEAT) && eng_cmd_ready_i;
  assign thr_go       = (state_q == S_THR)  && eng_cmd_ready_i;
  assign uc_step      = feat_go && !uc_last;
  assign feat_start_o = feat_go;
  assign feat_base_o  = job.x_base + rw[RW_X];
  assign wt_start_o   = ((state_q == S_FEAT_W) && feat_done_i) || thr_go;
  assign wt_base_o    = thr_go ? job.thr_base + 32'(cur_kom_q) * TP : job.w_base + cur_w_q;
  assign wt_nvec_o    = thr_go ? n_thr : n_acc;
  assign snk_start_o  = (state_q == S_THR_W) && wt_ok_q;
  assign snk_base_o   = job.y_base + cur_y_q;
  assign snk_nwords_o = n_acc >> 5;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= S_IDLE;
      cur_w_q      <= '0;
      cur_y_q      <= '0;
      cur_kom_q    <= '0;
      tile_end_q   <= 1'b0;
      job_end_q    <= 1'b0;
      wt_ok_q      <= 1'b0;
      eng_ok_q     <= 1'b0;
      snk_ok_q     <= 1'b0;
      src_sel_q    <= 1'b0;
      snk_sel_q    <= 1'b0;
      rowskip_ok_q <= 1'b0;
      fsnif_ok_q   <= 1'b0;
    end else begin
      if (wt_done_i)  wt_ok_q  <= 1'b1;
      if (eng_done_i) eng_ok_q <= 1'b1;
      if (snk_done_i) snk_ok_q <= 1'b1;
      unique case (state_q)
        S_IDLE: if (job_valid) begin
          rowskip_ok_q <= 1'b0;
          fsnif_ok_q   <= 1'b0;
          state_q      <= S_PREP;
        end
        S_PREP: begin
          if (rowskip_done) rowskip_ok_q <= 1'b1;
          if (fsnif_done)   fsnif_ok_q   <= 1'b1;
          if ((rowskip_ok_q || rowskip_done) && (fsnif_ok_q || fsnif_done)) state_q <= S_FEAT;
        end
        S_FEAT: if (eng_cmd_ready_i) begin
          // feature loading: capture this iteration's offsets, update indices
          cur_w_q    <= rw[RW_W];
          cur_y_q    <= rw[RW_Y];
          cur_kom_q  <= idx[3];
          tile_end_q <= &at_end[2:0];
          job_end_q  <= uc_last;
          src_sel_q  <= 1'b0;
          snk_sel_q  <= 1'b0;
          state_q    <= S_FEAT_W;
        end
        S_FEAT_W: if (feat_done_i) begin
          src_sel_q <= 1'b1;
          wt_ok_q   <= 1'b0;
          eng_ok_q  <= 1'b0;
          state_q   <= S_ACC;
        end
        S_ACC: if ((wt_ok_q || wt_done_i) && (eng_ok_q || eng_done_i)) begin
          state_q <= tile_end_q ? S_THR : S_NEXT;
        end
        S_THR: if (eng_cmd_ready_i) begin
          wt_ok_q  <= 1'b0;
          eng_ok_q <= 1'b0;
          state_q  <= S_THR_W;
        end
        S_THR_W: if (wt_ok_q) begin
          snk_sel_q <= 1'b1;
          snk_ok_q  <= 1'b0;
          state_q   <= S_OUT;
        end
        S_OUT: if ((snk_ok_q || snk_done_i) && (eng_ok_q || eng_done_i)) begin
          snk_sel_q <= 1'b0;
          state_q   <= S_NEXT;
        end
        S_NEXT: begin
          if (job_end_q)    state_q <= S_DONE;
          else if (!uc_busy) state_q <= S_FEAT;
        end
        S_DONE:  state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = rowskip_busy | fsnif_busy | uc_finished | (|nof_b);
endmodule
