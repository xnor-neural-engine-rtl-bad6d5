// xne_streamer: memory side of the XNE.
//
// Two sources (input features; weights and thresholds) and one sink (output
// activations) share the TP/32 TCDM master ports through two static
// multiplexers, arranged as in the paper's architecture figure: the first mux
// selects between the two sources (src_sel_i: 0 features, 1 weights), the
// second between that mux and the sink (snk_sel_i: 1 sink). Each source and
// the sink has its own address generator, started by the controller with a
// base address and a length; the controller keeps only one of them active at
// any time. Streams toward the engine use valid/ready handshakes.
module xne_streamer
  import xne_pkg::*;
#(
  parameter int unsigned TP = 128
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             src_sel_i,
  input  logic             snk_sel_i,
  // feature source
  input  logic             feat_start_i,
  input  logic [31:0]      feat_base_i,
  input  logic [IDX_W-1:0] feat_nvec_i,
  output logic             feat_done_o,
  output logic             feat_valid_o,
  input  logic             feat_ready_i,
  output logic [TP-1:0]    feat_data_o,
  // weight / threshold source
  input  logic             wt_start_i,
  input  logic [31:0]      wt_base_i,
  input  logic [IDX_W-1:0] wt_nvec_i,
  output logic             wt_done_o,
  output logic             wt_valid_o,
  input  logic             wt_ready_i,
  output logic [TP-1:0]    wt_data_o,
  // conv sink
  input  logic             snk_start_i,
  input  logic [31:0]      snk_base_i,
  input  logic [IDX_W-1:0] snk_nwords_i,
  output logic             snk_done_o,
  input  logic             snk_valid_i,
  output logic             snk_ready_o,
  input  logic [TP-1:0]    snk_data_i,
  // TCDM master ports
  output tcdm_req_t        tcdm_req_o [TP/32],
  input  tcdm_rsp_t        tcdm_rsp_i [TP/32]
);
  localparam int unsigned NP = TP / 32;

  tcdm_req_t src_req [2][NP];
  tcdm_rsp_t src_rsp [2][NP];
  tcdm_req_t mid_req [2][NP];   // [0] from the source mux, [1] from the sink
  tcdm_rsp_t mid_rsp [2][NP];
  logic      feat_busy, wt_busy, snk_busy;

  xne_source #(.TP(TP), .DEPTH(2)) i_feat_source (
    .clk_i, .rst_ni, .start_i(feat_start_i), .base_i(feat_base_i), .nvec_i(feat_nvec_i),
    .busy_o(feat_busy), .done_o(feat_done_o),
    .tcdm_req_o(src_req[0]), .tcdm_rsp_i(src_rsp[0]),
    .out_valid_o(feat_valid_o), .out_ready_i(feat_ready_i), .out_data_o(feat_data_o)
  );

  xne_source #(.TP(TP), .DEPTH(4)) i_weight_source (
    .clk_i, .rst_ni, .start_i(wt_start_i), .base_i(wt_base_i), .nvec_i(wt_nvec_i),
    .busy_o(wt_busy), .done_o(wt_done_o),
    .tcdm_req_o(src_req[1]), .tcdm_rsp_i(src_rsp[1]),
    .out_valid_o(wt_valid_o), .out_ready_i(wt_ready_i), .out_data_o(wt_data_o)
  );

  xne_sink #(.TP(TP)) i_conv_sink (
    .clk_i, .rst_ni, .start_i(snk_start_i), .base_i(snk_base_i), .nwords_i(snk_nwords_i),
    .busy_o(snk_busy), .done_o(snk_done_o),
    .tcdm_req_o(mid_req[1]), .tcdm_rsp_i(mid_rsp[1]),
    .in_valid_i(snk_valid_i), .in_ready_o(snk_ready_o), .in_data_i(snk_data_i)
  );

  xne_tcdm_mux #(.NP(NP)) i_src_mux (
    .clk_i, .rst_ni, .sel_i(src_sel_i),
    .in_req_i(src_req), .in_rsp_o(src_rsp),
    .out_req_o(mid_req[0]), .out_rsp_i(mid_rsp[0])
  );

  xne_tcdm_mux #(.NP(NP)) i_snk_mux (
    .clk_i, .rst_ni, .sel_i(snk_sel_i),
    .in_req_i(mid_req), .in_rsp_o(mid_rsp),
    .out_req_o(tcdm_req_o), .out_rsp_i(tcdm_rsp_i)
  );

  // only one address generator may talk to memory at a time
  a_one_active: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 $onehot0({feat_busy, wt_busy, snk_busy}));
endmodule
