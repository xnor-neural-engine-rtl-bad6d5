// tb_xne: end-to-end test of the XNOR Neural Engine at its default size (TP=128).
//
// A behavioural shared memory (xne_tb_mem) serves the TP/32 master ports; the
// testbench plays the host: it writes the microcode and the job registers over
// APB, triggers jobs, waits for the event and compares every output bit with
// a reference model computed here from the same memory image:
//   acc[k_out] = sum over (u_i, u_j, k_in < nif) of (W == x ? +1 : -1),
//                saturated to 16 bits after every TP-wide input tile,
//   y = sign(lambda) ? acc <= tau<<<S_tau : acc >= tau<<<S_tau.
// Jobs:
//   A  3x3 convolution, nif = nof = 256 (two input and two output tiles),
//      2x2 output, no memory stalls; its cycle count is checked against the
//      rate of one weight vector per cycle (>= 86 % of peak, the paper's
//      sustained figure);
//   B  dense layer with nif = 64 and nof = 32 (masking, partial accumulator
//      use), queued in the second register context while A runs;
//   C  3x3 convolution nif = 128, nof = 128, 3x1 output, with 30 % random
//      memory stalls and all four base addresses off word alignment
//      (realigners in both sources and the sink);
//   D  1x1-output layer with nif = 4096, fs = 3 and equal inputs and weights,
//      which drives the accumulators into saturation.
// Each mechanism (stall, masking, partial accumulators, queued job,
// saturation, both comparison signs, nonzero S_tau) is counted; one that
// never happens counts as a failure.
module tb_xne;
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

  xne_tb_mem #(.NP(NP), .WORDS(1 << 18)) i_mem (.clk_i(clk), .req_i(tcdm_req), .rsp_o(tcdm_rsp));

  int unsigned checks = 0, failures = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle++;

  // mechanism counters
  int unsigned n_evt = 0, n_sat = 0, n_mask = 0, n_partial = 0, n_queued = 0;
  int unsigned n_pos = 0, n_neg = 0, n_shift = 0;
  always @(posedge clk) if (evt) n_evt++;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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
    longint unsigned a = longint'(base) * 8 + bitidx;   // bases may be byte aligned
    logic [31:0] w;
    w = i_mem.mem[32'(a / 32)];
    return w[a % 32];
  endfunction

  function automatic logic [7:0] getbyte(int unsigned addr);
    return i_mem.mem[addr >> 2][8 * (addr % 4) +: 8];
  endfunction

  function automatic void setbit(int unsigned base, longint unsigned bitidx, bit v);
    longint unsigned a = longint'(base) * 8 + bitidx;
    i_mem.mem[32'(a / 32)][a % 32] = v;
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
    for (longint unsigned b = 0; b < nwbits + 32; b += 32)
      i_mem.mem[(j.w_base >> 2) + 32'(b / 32)] = (mode == 1) ? '1 : $urandom;
    for (longint unsigned b = 0; b < longint'(hin) * win * j.nif + 32; b += 32)
      i_mem.mem[(j.x_base >> 2) + 32'(b / 32)] = (mode == 1) ? '1 : $urandom;
    for (int k = 0; k < int'(j.nof) + int'(TP) + 4; k += 4)
      i_mem.mem[(j.thr_base >> 2) + 32'(k / 4)] = $urandom;
    // plant a few thresholds near typical accumulator values
    for (int k = 0; k < int'(j.nof); k++) begin
      logic [7:0] t;
      t = {1'($urandom), 7'($urandom % 32) - 7'd16};
      i_mem.mem[(j.thr_base + k) >> 2][8 * ((j.thr_base + k) % 4) +: 8] = t;
    end
    if (mode == 1) i_mem.mem[j.thr_base >> 2] = 32'h7f7f7f7f; // tau = -63 << s_tau, sign(lambda) = 0
    for (int k = 0; k < int'(j.h_out * j.w_out * j.nof) + 32; k += 32)
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
          t   = getbyte(j.thr_base + ko);
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

  job_s A, B, C, D;
  logic [31:0] st;
  longint unsigned t0, t1;
  int unsigned evt0;

  initial begin
    A = '{w_base: 32'h00000, x_base: 32'h30000, y_base: 32'h31000, thr_base: 32'h32000,
          nif: 256, nof: 256, fs: 3, w_out: 2, h_out: 2, s_tau: 1};
    B = '{w_base: 32'h33000, x_base: 32'h34000, y_base: 32'h34800, thr_base: 32'h34c00,
          nif: 64, nof: 32, fs: 1, w_out: 1, h_out: 1, s_tau: 0};
    C = '{w_base: 32'h35001, x_base: 32'h3b002, y_base: 32'h3c003, thr_base: 32'h3c801,
          nif: 128, nof: 128, fs: 3, w_out: 3, h_out: 1, s_tau: 2};
    D = '{w_base: 32'h40000, x_base: 32'hd0000, y_base: 32'hd8000, thr_base: 32'hd8800,
          nif: 4096, nof: 128, fs: 3, w_out: 1, h_out: 1, s_tau: 9};
    fill(A, 0); fill(B, 0); fill(C, 0); fill(D, 1);
    n_mask = (B.nif < TP) ? 1 : 0;
    n_partial = (B.nof < TP) ? 1 : 0;

    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    load_ucode();

    // job A, then job B queued while A runs
    i_mem.stall_pct = 0;
    evt0 = n_evt;
    program_job(A);
    t0 = cycle;
    apb_read(32'(REG_STATUS), st);
    check(st[2] == 1'b1, "STATUS busy while job A runs");
    program_job(B);
    apb_read(32'(REG_STATUS), st);
    check(st[1:0] == 2'd2, "two jobs pending");
    if (st[1:0] == 2'd2) n_queued++;
    wait (n_evt == evt0 + 1);
    t1 = cycle;
    wait (n_evt == evt0 + 2);
    @(negedge clk);
    apb_read(32'(REG_STATUS), st);
    check(st[1:0] == 2'd0, "no job pending after both events");
    check_job(A, "A");
    check_job(B, "B");
    $display("A: %0d cycles, %0d accumulation cycles (%0d%%)", t1 - t0, ideal_cycles(A),
             100 * ideal_cycles(A) / (t1 - t0));
    check(100 * ideal_cycles(A) >= 86 * (t1 - t0), "A sustains >= 86% of one weight vector per cycle");

    // job C with memory contention
    i_mem.stall_pct = 30;
    evt0 = n_evt;
    program_job(C);
    wait (n_evt == evt0 + 1);
    check(i_mem.n_stalls > 0, "memory stalls happened");
    check_job(C, "C");

    // job D: accumulator saturation
    i_mem.stall_pct = 0;
    evt0 = n_evt;
    program_job(D);
    wait (n_evt == evt0 + 1);
    begin
      automatic int unsigned s0 = n_sat;
      check_job(D, "D");
      check(n_sat > s0, "accumulators saturated in job D");
    end

    $display("mechanisms: stalls=%0d masking=%0d partial=%0d queued=%0d saturation=%0d pos=%0d neg=%0d shift=%0d events=%0d",
             i_mem.n_stalls, n_mask, n_partial, n_queued, n_sat, n_pos, n_neg, n_shift, n_evt);
    check(n_mask > 0 && n_partial > 0 && n_pos > 0 && n_neg > 0 && n_shift > 0, "every mechanism exercised");
    check(n_evt == 4, "one event per job");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
