// tb_xne_streamer: the two sources and the sink sharing the memory ports.
//
// A behavioural memory with 25 % random stalls sits behind the streamer.
// Repeated rounds switch the two multiplexers as the controller does:
// feature source (random length, random ready), weight source (random
// length, random ready), then the sink writing one output vector of random
// width. All base addresses are random bytes, so the realigners are used on
// three runs in four. Every streamed vector is compared with the memory
// image, and every written byte (and the bytes on both sides) is checked in
// memory. The test also counts that each path actually moved data.
module tb_xne_streamer;
  import xne_pkg::*;
  localparam int unsigned TP = 128, NP = TP / 32;
  logic clk = 0, rst_n = 0;
  logic src_sel = 0, snk_sel = 0;
  logic feat_start = 0, wt_start = 0, snk_start = 0;
  logic [31:0] feat_base = 0, wt_base = 0, snk_base = 0;
  logic [IDX_W-1:0] feat_nvec = 0, wt_nvec = 0, snk_nwords = 0;
  logic feat_done, wt_done, snk_done;
  logic feat_valid, feat_ready = 0, wt_valid, wt_ready = 0, snk_valid = 0, snk_ready;
  logic [TP-1:0] feat_data, wt_data, snk_data = 0;
  tcdm_req_t req [NP];
  tcdm_rsp_t rsp [NP];
  int checks = 0, failures = 0, n_feat = 0, n_wt = 0, n_snk = 0;

  always #1 clk = ~clk;

  xne_streamer #(.TP(TP)) dut (
    .clk_i(clk), .rst_ni(rst_n), .src_sel_i(src_sel), .snk_sel_i(snk_sel),
    .feat_start_i(feat_start), .feat_base_i(feat_base), .feat_nvec_i(feat_nvec),
    .feat_done_o(feat_done), .feat_valid_o(feat_valid), .feat_ready_i(feat_ready),
    .feat_data_o(feat_data),
    .wt_start_i(wt_start), .wt_base_i(wt_base), .wt_nvec_i(wt_nvec), .wt_done_o(wt_done),
    .wt_valid_o(wt_valid), .wt_ready_i(wt_ready), .wt_data_o(wt_data),
    .snk_start_i(snk_start), .snk_base_i(snk_base), .snk_nwords_i(snk_nwords),
    .snk_done_o(snk_done), .snk_valid_i(snk_valid), .snk_ready_o(snk_ready),
    .snk_data_i(snk_data), .tcdm_req_o(req), .tcdm_rsp_i(rsp));

  xne_tb_mem #(.NP(NP), .WORDS(1 << 15), .STALL_PCT(25)) i_mem (.clk_i(clk), .req_i(req), .rsp_o(rsp));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [7:0] byte_at(logic [31:0] a);
    return i_mem.mem[a / 4][8 * (a % 4) +: 8];
  endfunction

  function automatic logic [TP-1:0] vec(logic [31:0] base, int v);
    logic [TP-1:0] r;
    for (int i = 0; i < TP / 8; i++) r[8*i +: 8] = byte_at(base + 32'(TP / 8 * v + i));
    return r;
  endfunction

  // stream n vectors from one source with a randomly toggled ready
  task automatic stream(bit wt, logic [31:0] base, int n);
    int got = 0;
    @(negedge clk);
    src_sel = wt; snk_sel = 0;
    if (wt) begin wt_base = base; wt_nvec = IDX_W'(n); wt_start = 1; end
    else begin feat_base = base; feat_nvec = IDX_W'(n); feat_start = 1; end
    @(negedge clk);
    wt_start = 0; feat_start = 0;
    while (got < n) begin
      logic rdy = ($urandom % 3) != 0;
      if (wt) wt_ready = rdy; else feat_ready = rdy;
      @(posedge clk);
      if (wt ? (wt_valid && wt_ready) : (feat_valid && feat_ready)) begin
        check($sformatf("%s vector %0d", wt ? "weight" : "feature", got),
              (wt ? wt_data : feat_data) == vec(base, got));
        got++;
        if (wt) n_wt++; else n_feat++;
      end
      @(negedge clk);
    end
    wt_ready = 0; feat_ready = 0;
    repeat (3) @(negedge clk);
    #0.5;
    check("no extra vector", !(wt ? wt_valid : feat_valid));
  endtask

  task automatic write_out(logic [31:0] base, int nw);
    logic [TP-1:0] d = {$urandom, $urandom, $urandom, $urandom};
    logic [7:0] around [8];
    @(negedge clk);
    snk_sel = 1;
    for (int i = 0; i < 4; i++) begin
      around[i] = byte_at(base - 4 + i); around[4 + i] = byte_at(base + 32'(4 * nw + i));
    end
    snk_base = base; snk_nwords = IDX_W'(nw); snk_start = 1;
    @(negedge clk);
    snk_start = 0;
    snk_valid = 1; snk_data = d;
    #0.5;
    while (!snk_ready) begin @(negedge clk); #0.5; end
    @(negedge clk);
    snk_valid = 0;
    repeat (2) @(negedge clk);
    for (int i = 0; i < 4 * nw; i++) check($sformatf("written byte %0d", i), byte_at(base + 32'(i)) == d[8*i +: 8]);
    for (int i = 0; i < 4; i++) begin
      check("byte before the start untouched", byte_at(base - 4 + i) == around[i]);
      check("byte past the end untouched", byte_at(base + 32'(4 * nw + i)) == around[4 + i]);
    end
    n_snk++;
    snk_sel = 0;
  endtask

  initial begin
    for (int w = 0; w < (1 << 14); w++) i_mem.mem[w] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      stream(0, 32'($urandom % 3200), 1 + $urandom % 4);
      stream(1, 32'h8000 + 32'($urandom % 3200), 1 + $urandom % 20);
      write_out(32'h10004 + 32'(24 * r) + 32'($urandom % 4), 1 + $urandom % NP);
    end
    check("feature path used", n_feat > 0);
    check("weight path used", n_wt > 0);
    check("sink path used", n_snk > 0);
    check("memory stalls seen", i_mem.n_stalls > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
