// tb_xne_workloads: layers of the networks the XNE is evaluated on, run end
// to end on the default-size top (TP = 128).
//
// Same host model and reference model as tb_xne (APB programming, microcode
// load, bit-exact comparison of every output with the +-1 sums, 16-bit
// saturation per input tile and sign-magnitude thresholds). The layers:
//   V2  CIFAR-10 VGG-like net, 64x16x16 -> 128x16x16, 3x3, input stored
//       with its zero border (18x18), i.e. a whole "same" convolution;
//   V6  same net, 512x4x4 -> 512x4x4, 3x3 (four input and four output tiles,
//       the largest weight set of the net, 288 kB);
//   R1  ResNet-18/34 first-stage 3x3 layer, 64 -> 64 channels, a band of two
//       output rows of the 56-pixel-wide map (a host tiles the map in bands);
//   FC  final dense layer of ResNet with 512 inputs and the 1000 classes
//       padded to 1024 outputs.
// For each layer the cycle count is compared with one weight vector per
// cycle; V6, made only of full tiles, must reach 86 %. Memory has no stalls
// here (contention is covered by tb_xne).
module tb_xne_workloads;
  import xne_pkg::*;

  localparam int unsigned TP  = 128;
  localparam int unsigned NP  = TP / 32;
  localparam int unsigned TPB = TP / 8;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        psel = 0, penable = 0, pwrite = 0;
  logic [31:0] paddr = 0, pwdata = 0, prdata;
  logic        pready, pslverr, evt;
  tcdm_req_t   tcdm_req [NP];
  tcdm_rsp_t   tcdm_rsp [NP];

  always #1 clk = ~clk;

  xne dut (
    .clk_i(clk), .rst_ni(rst_n),
    .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite), .paddr_i(paddr),
    .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready), .pslverr_o(pslverr),
    .tcdm_req_o(tcdm_req), .tcdm_rsp_i(tcdm_rsp), .evt_o(evt)
  );

  xne_tb_mem #(.NP(NP), .WORDS(1 << 18), .STALL_PCT(0)) i_mem (.clk_i(clk), .req_i(tcdm_req), .rsp_o(tcdm_rsp));

  int unsigned checks = 0, failures = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle++;

  // mechanism counters
  int unsigned n_evt = 0, n_sat = 0, n_mask = 0, n_partial = 0, n_queued = 0;
  int unsigned n_pos = 0, n_neg = 0, n_shift = 0;
  always @(posedge clk) if (evt) n_evt++;

  initial begin : watchdog
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------- APB host
  task automatic apb_write(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    psel = 1; pwrite = 1; paddr = a; pwdata = d; penable = 0;
    @(negedge clk);
    penable = 1;
    @(negedge clk);
    psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic apb_read(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    psel = 1; pwrite = 0; paddr = a; penable = 0;
    @(negedge clk);
    penable = 1;
    #0 d = prdata;
    @(negedge clk);
    psel = 0; penable = 0;
  endtask

  // ------------------------------------------------------------- microcode
  function automatic logic [7:0] ins(uc_op_e op, logic [1:0] out, logic rw, logic [3:0] in);
    return {op, out, rw, in};
  endfunction

  task automatic load_ucode();
    logic [7:0] c [32];
    logic [7:0] l [8];
    for (int i = 0; i < 32; i++) c[i] = '0;
    for (int i = 0; i < 8; i++)  l[i] = '0;
    // loop 0, k_in_major
    c[0]  = ins(UC_ADD, RW_W, 0, RO_TPSQ);     c[1]  = ins(UC_ADD, RW_X, 0, RO_TPX);
    // loop 1, u_j
    c[2]  = ins(UC_ADD, RW_W, 0, RO_TPSQ);     c[3]  = ins(UC_ADD, RW_X, 0, RO_TPX);
    // loop 2, u_i
    c[4]  = ins(UC_ADD, RW_W, 0, RO_TPSQ);     c[5]  = ins(UC_ADD, RW_X, 0, RO_ROWSKIP);
    // loop 3, k_out_major
    c[6]  = ins(UC_ADD, RW_W, 0, RO_TPSQ);     c[7]  = ins(UC_MV, RW_X, 1, 4'(RW_XMAJ));
    c[8]  = ins(UC_ADD, RW_Y, 0, RO_TPY);
    // loop 4, j
    c[9]  = ins(UC_ADD, RW_Y, 0, RO_TPY);      c[10] = ins(UC_ADD, RW_XMAJ, 0, RO_NIF);
    c[11] = ins(UC_MV, RW_W, 0, RO_ZERO);      c[12] = ins(UC_MV, RW_X, 1, 4'(RW_XMAJ));
    // loop 5, i
    c[13] = ins(UC_ADD, RW_Y, 0, RO_TPY);      c[14] = ins(UC_ADD, RW_XMAJ, 0, RO_FSNIF);
    c[15] = ins(UC_MV, RW_W, 0, RO_ZERO);      c[16] = ins(UC_MV, RW_X, 1, 4'(RW_XMAJ));
    l[0] = {3'd2, 5'd0};  l[1] = {3'd2, 5'd2};  l[2] = {3'd2, 5'd4};
    l[3] = {3'd3, 5'd6};  l[4] = {3'd4, 5'd9};  l[5] = {3'd4, 5'd13};
    for (int w = 0; w < 8; w++) apb_write(32'(REG_UCODE0) + 4*w, {c[4*w+3], c[4*w+2], c[4*w+1], c[4*w]});
    for (int w = 0; w < 2; w++) apb_write(32'(REG_LOOPS0) + 4*w, {l[4*w+3], l[4*w+2], l[4*w+1], l[4*w]});
  endtask

  // ------------------------------------------------------------- jobs
  typedef struct {
    int unsigned w_base, x_base, y_base, thr_base;
    int unsigned nif, nof, fs, w_out, h_out, s_tau;
  } job_s;

  function automatic bit getbit(int unsigned base, longint unsigned bitidx);
    logic [31:0] w;
    w = i_mem.mem[(base >> 2) + 32'(bitidx / 32)];
    return w[bitidx % 32];
  endfunction

  function automatic void setbit(int unsigned base, longint unsigned bitidx, bit v);
    i_mem.mem[(base >> 2) + 32'(bitidx / 32)][bitidx % 32] = v;
  endfunction

  // weights: vector (kom, ui, uj, kim, kmin), TP bits each
  function automatic longint unsigned wbit(job_s j, int ko, int ui, int uj, int ki);
    int unsigned nacc = (j.nof < TP) ? j.nof : TP;
    int unsigned nkim = (j.nif + TP - 1) / TP;
    longint unsigned v;
    v = ((((longint'(ko / TP) * j.fs + ui) * j.fs + uj) * nkim + ki / TP) * nacc + ko % TP);
    return v * TP + ki % TP;
  endfunction

  task automatic fill(job_s j, int mode);   // mode 0 random, 1 all ones
    int unsigned win = j.w_out + j.fs - 1, hin = j.h_out + j.fs - 1;
    int unsigned nacc = (j.nof < TP) ? j.nof : TP;
    int unsigned nkom = (j.nof + TP - 1) / TP, nkim = (j.nif + TP - 1) / TP;
    longint unsigned nwbits = longint'(nkom) * j.fs * j.fs * nkim * nacc * TP;
    for (longint unsigned b = 0; b < nwbits; b += 32)
      i_mem.mem[(j.w_base >> 2) + 32'(b / 32)] = (mode == 1) ? '1 : $urandom;
    for (longint unsigned b = 0; b < longint'(hin) * win * j.nif; b += 32)
      i_mem.mem[(j.x_base >> 2) + 32'(b / 32)] = (mode == 1) ? '1 : $urandom;
    for (int k = 0; k < int'(j.nof) + int'(TP); k += 4)
      i_mem.mem[(j.thr_base >> 2) + 32'(k / 4)] = $urandom;
    // plant a few thresholds near typical accumulator values
    for (int k = 0; k < int'(j.nof); k++) begin
      logic [7:0] t;
      t = {1'($urandom), 7'($urandom % 32) - 7'd16};
      i_mem.mem[(j.thr_base >> 2) + 32'(k / 4)][8*(k%4) +: 8] = t;
    end
    if (mode == 1) i_mem.mem[j.thr_base >> 2] = 32'h7f7f7f7f; // tau = -63 << s_tau, sign(lambda) = 0
    for (int k = 0; k < int'(j.h_out * j.w_out * j.nof); k += 32)
      i_mem.mem[(j.y_base >> 2) + 32'(k / 32)] = 32'hdeadbeef;
  endtask

  task automatic program_job(job_s j);
    apb_write(32'(REG_W_BASE), j.w_base);
    apb_write(32'(REG_X_BASE), j.x_base);
    apb_write(32'(REG_Y_BASE), j.y_base);
    apb_write(32'(REG_THR_BASE), j.thr_base);
    apb_write(32'(REG_NIF), j.nif);
    apb_write(32'(REG_NOF), j.nof);
    apb_write(32'(REG_FS), j.fs);
    apb_write(32'(REG_W_OUT), j.w_out);
    apb_write(32'(REG_H_OUT), j.h_out);
    apb_write(32'(REG_S_TAU), j.s_tau);
    apb_write(32'(REG_TRIGGER), 0);
  endtask

  task automatic check_job(job_s j, string name);
    int unsigned win = j.w_out + j.fs - 1;
    int errs = 0;
    for (int i = 0; i < int'(j.h_out); i++)
      for (int jj = 0; jj < int'(j.w_out); jj++)
        for (int ko = 0; ko < int'(j.nof); ko++) begin
          int acc = 0, tile = 0;
          logic [7:0] t;
          int tau;
          bit exp, got;
          for (int ui = 0; ui < int'(j.fs); ui++)
            for (int uj = 0; uj < int'(j.fs); uj++)
              for (int ki = 0; ki < int'(j.nif); ki++) begin
                bit xb, wb;
                xb = getbit(j.x_base, (longint'(i + ui) * win + (jj + uj)) * j.nif + ki);
                wb = getbit(j.w_base, wbit(j, ko, ui, uj, ki));
                tile += (xb == wb) ? 1 : -1;
                if (ki % TP == TP - 1 || ki == int'(j.nif) - 1) begin
                  acc += tile;
                  tile = 0;
                  if (acc > 32767)  begin acc = 32767;  n_sat++; end
                  if (acc < -32768) begin acc = -32768; n_sat++; end
                end
              end
          t   = i_mem.mem[(j.thr_base >> 2) + 32'(ko / 4)][8*(ko%4) +: 8];
          tau = (t[6] ? -int'(t[5:0]) : int'(t[5:0])) <<< j.s_tau;
          exp = t[7] ? (acc <= tau) : (acc >= tau);
          if (t[7]) n_neg++; else n_pos++;
          if (j.s_tau != 0) n_shift++;
          got = getbit(j.y_base, (longint'(i) * j.w_out + jj) * j.nof + ko);
          checks++;
          if (exp != got) begin
            failures++;
            errs++;
            if (errs < 5) $display("FAIL %s: y[%0d][%0d][%0d] got %0d exp %0d (acc %0d tau %0d)",
                                   name, i, jj, ko, got, exp, acc, tau);
          end
        end
    $display("%s: %0d output bits checked, %0d wrong", name, j.h_out * j.w_out * j.nof, errs);
  endtask

  function automatic longint unsigned ideal_cycles(job_s j);
    int unsigned nacc = (j.nof < TP) ? j.nof : TP;
    return longint'(j.h_out) * j.w_out * ((j.nof + TP - 1) / TP) * j.fs * j.fs *
           ((j.nif + TP - 1) / TP) * nacc;
  endfunction

  job_s V2, V6, R1, FC;

  task automatic run(job_s j, string name, int min_pct);
    longint unsigned t0, t1;
    int unsigned evt0 = n_evt;
    fill(j, 0);
    program_job(j);
    t0 = cycle;
    wait (n_evt == evt0 + 1);
    t1 = cycle;
    check_job(j, name);
    $display("%s: %0d cycles, %0d weight-vector cycles (%0d%%)", name, t1 - t0, ideal_cycles(j),
             100 * ideal_cycles(j) / (t1 - t0));
    check(100 * ideal_cycles(j) >= longint'(min_pct) * (t1 - t0), {name, ": utilisation"});
  endtask

  initial begin
    V2 = '{w_base: 32'h00000, x_base: 32'h04000, y_base: 32'h05000, thr_base: 32'h06000,
           nif: 64, nof: 128, fs: 3, w_out: 16, h_out: 16, s_tau: 2};
    V6 = '{w_base: 32'h10000, x_base: 32'h60000, y_base: 32'h61000, thr_base: 32'h62000,
           nif: 512, nof: 512, fs: 3, w_out: 4, h_out: 4, s_tau: 3};
    R1 = '{w_base: 32'h90000, x_base: 32'h92000, y_base: 32'h93000, thr_base: 32'h94000,
           nif: 64, nof: 64, fs: 3, w_out: 56, h_out: 2, s_tau: 2};
    FC = '{w_base: 32'h70000, x_base: 32'h80000, y_base: 32'h80100, thr_base: 32'h80200,
           nif: 512, nof: 1024, fs: 1, w_out: 1, h_out: 1, s_tau: 1};
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    load_ucode();
    run(V2, "V2", 80);
    run(V6, "V6", 86);
    run(R1, "R1", 75);
    run(FC, "FC", 60);
    check(n_evt == 4, "one event per layer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
