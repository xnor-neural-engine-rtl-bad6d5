// xne: XNOR Neural Engine, a binary neural network accelerator for a
// shared-memory microcontroller cluster.
//
// The engine computes binarized convolutional and dense layers
//   y[k_out] = bin( sum over k_in, filter of XNOR(W, x) )
// holding TP input features in a register and TP partial sums in
// accumulators (input- and output-stationary), so no integer partial result
// ever goes to memory. It has three parts:
//   controller - APB register file (microcode + two job contexts), microcode
//                processor for the six outer loops, central FSM;
//   engine     - XNOR, masking, popcount, TP 16-bit accumulators, threshold
//                binarization, fed through small FIFOs;
//   streamer   - feature source, weight/threshold source and output sink on
//                TP/32 32-bit TCDM master ports behind two static muxes.
// Interface: one APB target, TP/32 TCDM master ports (req/gnt, read data one
// cycle after the grant), one event output that pulses at the end of a job.
// Timing: per input tile 1 feature vector + min(TP,nof) weight vectors, one
// vector per cycle when memory grants every request; thresholding adds
// ceil(8*min(TP,nof)/TP) + 1 vectors per output tile.
//
// The block structure, TP=128 default, FIFO depths and port counts follow the
// paper; the memory layout, register map and microcode encoding are this
// design's own (see xne_pkg).
module xne
  import xne_pkg::*;
#(
  parameter int unsigned TP = 128
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        psel_i,
  input  logic        penable_i,
  input  logic        pwrite_i,
  input  logic [31:0] paddr_i,
  input  logic [31:0] pwdata_i,
  output logic [31:0] prdata_o,
  output logic        pready_o,
  output logic        pslverr_o,
  output tcdm_req_t   tcdm_req_o [TP/32],
  input  tcdm_rsp_t   tcdm_rsp_i [TP/32],
  output logic        evt_o
);
  // controller <-> engine / streamer
  logic              cmd_valid, cmd_ready, eng_done;
  eng_cmd_t          cmd;
  logic [STAU_W-1:0] s_tau;
  logic              src_sel, snk_sel;
  logic              feat_start, feat_done, wt_start, wt_done, snk_start, snk_done;
  logic [31:0]       feat_base, wt_base, snk_base;
  logic [IDX_W-1:0]  wt_nvec, snk_nwords;

  // streams
  logic          sf_valid, sf_ready, ef_valid, ef_ready;
  logic          sw_valid, sw_ready, ew_valid, ew_ready;
  logic          eo_valid, eo_ready, so_valid, so_ready;
  logic [TP-1:0] sf_data, ef_data, sw_data, ew_data, eo_data, so_data;

  xne_controller #(.TP(TP)) i_controller (
    .clk_i, .rst_ni, .psel_i, .penable_i, .pwrite_i, .paddr_i, .pwdata_i,
    .prdata_o, .pready_o, .pslverr_o, .evt_o,
    .eng_cmd_valid_o(cmd_valid), .eng_cmd_ready_i(cmd_ready), .eng_cmd_o(cmd),
    .s_tau_o(s_tau), .eng_done_i(eng_done),
    .src_sel_o(src_sel), .snk_sel_o(snk_sel),
    .feat_start_o(feat_start), .feat_base_o(feat_base), .feat_done_i(feat_done),
    .wt_start_o(wt_start), .wt_base_o(wt_base), .wt_nvec_o(wt_nvec), .wt_done_i(wt_done),
    .snk_start_o(snk_start), .snk_base_o(snk_base), .snk_nwords_o(snk_nwords),
    .snk_done_i(snk_done)
  );

  xne_streamer #(.TP(TP)) i_streamer (
    .clk_i, .rst_ni, .src_sel_i(src_sel), .snk_sel_i(snk_sel),
    .feat_start_i(feat_start), .feat_base_i(feat_base), .feat_nvec_i(IDX_W'(1)),
    .feat_done_o(feat_done),
    .feat_valid_o(sf_valid), .feat_ready_i(sf_ready), .feat_data_o(sf_data),
    .wt_start_i(wt_start), .wt_base_i(wt_base), .wt_nvec_i(wt_nvec), .wt_done_o(wt_done),
    .wt_valid_o(sw_valid), .wt_ready_i(sw_ready), .wt_data_o(sw_data),
    .snk_start_i(snk_start), .snk_base_i(snk_base), .snk_nwords_i(snk_nwords),
    .snk_done_o(snk_done),
    .snk_valid_i(so_valid), .snk_ready_o(so_ready), .snk_data_i(so_data),
    .tcdm_req_o, .tcdm_rsp_i
  );

  // decoupling FIFOs: features 2, weights/thresholds 4, outputs 2
  xne_fifo #(.WIDTH(TP), .DEPTH(2)) i_feat_fifo (
    .clk_i, .rst_ni, .clear_i(1'b0),
    .in_valid_i(sf_valid), .in_ready_o(sf_ready), .in_data_i(sf_data),
    .out_valid_o(ef_valid), .out_ready_i(ef_ready), .out_data_o(ef_data)
  );
  xne_fifo #(.WIDTH(TP), .DEPTH(4)) i_weight_fifo (
    .clk_i, .rst_ni, .clear_i(1'b0),
    .in_valid_i(sw_valid), .in_ready_o(sw_ready), .in_data_i(sw_data),
    .out_valid_o(ew_valid), .out_ready_i(ew_ready), .out_data_o(ew_data)
  );
  xne_fifo #(.WIDTH(TP), .DEPTH(2)) i_out_fifo (
    .clk_i, .rst_ni, .clear_i(1'b0),
    .in_valid_i(eo_valid), .in_ready_o(eo_ready), .in_data_i(eo_data),
    .out_valid_o(so_valid), .out_ready_i(so_ready), .out_data_o(so_data)
  );

  xne_engine #(.TP(TP)) i_engine (
    .clk_i, .rst_ni,
    .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_i(cmd), .s_tau_i(s_tau),
    .done_o(eng_done),
    .feat_valid_i(ef_valid), .feat_ready_o(ef_ready), .feat_data_i(ef_data),
    .wt_valid_i(ew_valid), .wt_ready_o(ew_ready), .wt_data_i(ew_data),
    .out_valid_o(eo_valid), .out_ready_i(eo_ready), .out_data_o(eo_data)
  );
endmodule
