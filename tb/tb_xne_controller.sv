// tb_xne_controller: controller (register file, microcode, FSM) on its own.
//
// The streamer and the engine are replaced by models that answer every start
// and every engine command with a done pulse after a random delay (the
// engine's after the weight stream it consumes). The testbench programs the
// microcode of a 3x3 convolution and three jobs through APB, records every
// feature, weight/threshold and output transfer the controller starts, and
// compares the list with the loop nest of a stride-1 convolution:
//   for i, j, k_out_major, u_i, u_j, k_in_major: feature + weight vectors;
//   after the last (u_i, u_j, k_in_major): thresholds + output vector.
// It also checks that only one address generator works at a time with the
// right multiplexer selection, that evt_o pulses once per job, and that the
// second job can be queued while the first one runs.
module tb_xne_controller;
  import xne_pkg::*;
  localparam int unsigned TP = 128, TPB = TP / 8;
  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [31:0] paddr = 0, pwdata = 0, prdata;
  logic pready, pslverr, evt;
  logic eng_cmd_valid, eng_cmd_ready = 0, eng_done = 0;
  eng_cmd_t eng_cmd;
  logic [STAU_W-1:0] s_tau;
  logic src_sel, snk_sel;
  logic feat_start, feat_done = 0, wt_start, wt_done = 0, snk_start, snk_done = 0;
  logic [31:0] feat_base, wt_base, snk_base;
  logic [IDX_W-1:0] wt_nvec, snk_nwords;
  int checks = 0, failures = 0, n_evt = 0;

  always #1 clk = ~clk;

  xne_controller #(.TP(TP)) dut (
    .clk_i(clk), .rst_ni(rst_n), .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite),
    .paddr_i(paddr), .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready),
    .pslverr_o(pslverr), .evt_o(evt),
    .eng_cmd_valid_o(eng_cmd_valid), .eng_cmd_ready_i(eng_cmd_ready), .eng_cmd_o(eng_cmd),
    .s_tau_o(s_tau), .eng_done_i(eng_done),
    .src_sel_o(src_sel), .snk_sel_o(snk_sel),
    .feat_start_o(feat_start), .feat_base_o(feat_base), .feat_done_i(feat_done),
    .wt_start_o(wt_start), .wt_base_o(wt_base), .wt_nvec_o(wt_nvec), .wt_done_i(wt_done),
    .snk_start_o(snk_start), .snk_base_o(snk_base), .snk_nwords_o(snk_nwords),
    .snk_done_i(snk_done));

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ transfer log
  typedef struct { int kind; logic [31:0] base; int len; } xfer_t;  // 0 feat, 1 wt, 2 out
  xfer_t got [$];
  int feat_t = 0, wt_t = 0, snk_t = 0, eng_t = 0;
  bit feat_act = 0, wt_act = 0, snk_act = 0, eng_pend = 0;

  always begin
    @(negedge clk);
    feat_done = (feat_t == 1); if (feat_t > 0) feat_t--;
    wt_done   = (wt_t == 1);   if (wt_t > 0) wt_t--;
    snk_done  = (snk_t == 1);  if (snk_t > 0) snk_t--;
    eng_done  = (eng_t == 1);  if (eng_t > 0) eng_t--;
    if (feat_done) feat_act = 0;
    if (wt_done) begin
      wt_act = 0;
      if (eng_pend) begin eng_t = 1 + $urandom % 4; eng_pend = 0; end
    end
    if (snk_done) snk_act = 0;
    eng_cmd_ready = ($urandom % 4) != 0;
    #0.5;
    if (eng_cmd_valid && eng_cmd_ready) eng_pend = 1;
    // a generator uses the ports from the cycle after its start
    if (int'(feat_act) + int'(wt_act) + int'(snk_act) > 1) check(0, "two address generators active");
    if (feat_act && (src_sel || snk_sel)) check(0, "mux selection while loading features");
    if (wt_act && (!src_sel || snk_sel)) check(0, "mux selection while loading weights");
    if (snk_act && !snk_sel) check(0, "mux selection while writing outputs");
    if (feat_start) begin got.push_back('{0, feat_base, 1}); feat_act = 1; feat_t = 1 + $urandom % 6; end
    if (wt_start)   begin got.push_back('{1, wt_base, int'(wt_nvec)}); wt_act = 1; wt_t = 1 + $urandom % 12; end
    if (snk_start)  begin got.push_back('{2, snk_base, int'(snk_nwords)}); snk_act = 1; snk_t = 1 + $urandom % 4; end
    if (evt) n_evt++;
  end

  // ------------------------------------------------------------ APB host
  task automatic apb_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = 32'(a); pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic apb_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = 32'(a);
    @(negedge clk); penable = 1;
    #0.5 d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  function automatic logic [7:0] ins(uc_op_e op, logic [1:0] out, logic rw, logic [3:0] in);
    return {op, out, rw, in};
  endfunction

  task automatic load_ucode();
    logic [7:0] c [32];
    logic [7:0] l [8];
    for (int i = 0; i < 32; i++) c[i] = '0;
    for (int i = 0; i < 8; i++)  l[i] = '0;
    c[0]  = ins(UC_ADD, RW_W, 0, RO_TPSQ);  c[1]  = ins(UC_ADD, RW_X, 0, RO_TPX);
    c[2]  = ins(UC_ADD, RW_W, 0, RO_TPSQ);  c[3]  = ins(UC_ADD, RW_X, 0, RO_TPX);
    c[4]  = ins(UC_ADD, RW_W, 0, RO_TPSQ);  c[5]  = ins(UC_ADD, RW_X, 0, RO_ROWSKIP);
    c[6]  = ins(UC_ADD, RW_W, 0, RO_TPSQ);  c[7]  = ins(UC_MV, RW_X, 1, 4'(RW_XMAJ));
    c[8]  = ins(UC_ADD, RW_Y, 0, RO_TPY);
    c[9]  = ins(UC_ADD, RW_Y, 0, RO_TPY);   c[10] = ins(UC_ADD, RW_XMAJ, 0, RO_NIF);
    c[11] = ins(UC_MV, RW_W, 0, RO_ZERO);   c[12] = ins(UC_MV, RW_X, 1, 4'(RW_XMAJ));
    c[13] = ins(UC_ADD, RW_Y, 0, RO_TPY);   c[14] = ins(UC_ADD, RW_XMAJ, 0, RO_FSNIF);
    c[15] = ins(UC_MV, RW_W, 0, RO_ZERO);   c[16] = ins(UC_MV, RW_X, 1, 4'(RW_XMAJ));
    l[0] = {3'd2, 5'd0};  l[1] = {3'd2, 5'd2};  l[2] = {3'd2, 5'd4};
    l[3] = {3'd3, 5'd6};  l[4] = {3'd4, 5'd9};  l[5] = {3'd4, 5'd13};
    for (int w = 0; w < 8; w++) apb_write(REG_UCODE0 + 8'(4*w), {c[4*w+3], c[4*w+2], c[4*w+1], c[4*w]});
    for (int w = 0; w < 2; w++) apb_write(REG_LOOPS0 + 8'(4*w), {l[4*w+3], l[4*w+2], l[4*w+1], l[4*w]});
  endtask

  typedef struct { int nif, nof, fs, w_out, h_out; logic [31:0] wb, xb, yb, tb; } job_s;

  task automatic program_job(job_s j);
    apb_write(REG_W_BASE, j.wb);   apb_write(REG_X_BASE, j.xb);
    apb_write(REG_Y_BASE, j.yb);   apb_write(REG_THR_BASE, j.tb);
    apb_write(REG_NIF, 32'(j.nif)); apb_write(REG_NOF, 32'(j.nof));
    apb_write(REG_FS, 32'(j.fs));   apb_write(REG_W_OUT, 32'(j.w_out));
    apb_write(REG_H_OUT, 32'(j.h_out)); apb_write(REG_S_TAU, 32'd3);
    apb_write(REG_TRIGGER, 0);
  endtask

  // expected transfers of one job, appended to exp
  xfer_t exp [$];
  task automatic expect_job(job_s j);
    int nkim = (j.nif + TP - 1) / TP, nkom = (j.nof + TP - 1) / TP;
    int n_acc = (j.nof < TP) ? j.nof : TP, n_in = (j.nif < TP) ? j.nif : TP;
    int w_in = j.w_out + j.fs - 1, nif_b = j.nif / 8;
    for (int i = 0; i < j.h_out; i++)
      for (int jj = 0; jj < j.w_out; jj++)
        for (int kom = 0; kom < nkom; kom++) begin
          for (int ui = 0; ui < j.fs; ui++)
            for (int uj = 0; uj < j.fs; uj++)
              for (int kim = 0; kim < nkim; kim++) begin
                exp.push_back('{0, j.xb + 32'(((i + ui) * w_in + jj + uj) * nif_b + kim * n_in / 8), 1});
                exp.push_back('{1, j.wb + 32'(((((kom * j.fs + ui) * j.fs + uj) * nkim + kim) * n_acc) * TPB), n_acc});
              end
          exp.push_back('{1, j.tb + 32'(kom * TP), (n_acc + TPB - 1) / TPB});
          exp.push_back('{2, j.yb + 32'((i * j.w_out + jj) * j.nof / 8 + kom * n_acc / 8), n_acc / 32});
        end
  endtask

  task automatic compare(string name);
    check(got.size() == exp.size(), $sformatf("%s: %0d transfers, expected %0d", name, got.size(), exp.size()));
    for (int k = 0; k < exp.size() && k < got.size(); k++)
      check(got[k].kind == exp[k].kind && got[k].base == exp[k].base && got[k].len == exp[k].len,
            $sformatf("%s transfer %0d: kind %0d base %h len %0d, expected %0d %h %0d", name, k,
                      got[k].kind, got[k].base, got[k].len, exp[k].kind, exp[k].base, exp[k].len));
    got.delete();
    exp.delete();
  endtask

  task automatic wait_idle();
    logic [31:0] st;
    do apb_read(REG_STATUS, st); while (st != 0);
  endtask

  initial begin
    job_s a, b, c;
    logic [31:0] st;
    a = '{256, 256, 3, 2, 2, 32'h1000, 32'h20000, 32'h30000, 32'h40000};
    b = '{64, 32, 1, 1, 1, 32'h5000, 32'h6000, 32'h7000, 32'h8000};
    c = '{128, 384, 2, 3, 1, 32'h9000, 32'ha000, 32'hb000, 32'hc000};
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_ucode();
    // job a runs while job b is queued behind it
    program_job(a);
    program_job(b);
    apb_read(REG_STATUS, st);
    check(st == {29'b0, 1'b1, 2'd2}, $sformatf("two jobs pending, status %h", st));
    expect_job(a);
    expect_job(b);
    wait_idle();
    repeat (5) @(negedge clk);
    compare("jobs a+b");
    check(n_evt == 2, $sformatf("%0d events after two jobs", n_evt));
    program_job(c);
    expect_job(c);
    repeat (5) @(negedge clk);
    wait_idle();
    repeat (5) @(negedge clk);
    compare("job c");
    check(n_evt == 3, $sformatf("%0d events after three jobs", n_evt));
    check(s_tau == 3, "s_tau forwarded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
