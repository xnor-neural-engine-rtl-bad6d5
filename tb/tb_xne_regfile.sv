// tb_xne_regfile: APB register file.
//
// Writes random microcode, loop descriptors and two job contexts through APB
// (setup then access phase), reads everything back, and checks the decoded
// outputs towards the controller. Then checks the two-context queue: two
// triggers make two jobs pending, a third trigger is dropped, job_done_i
// hands the second context to the run side, and STATUS follows every step.
module tb_xne_regfile;
  import xne_pkg::*;
  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [31:0] paddr = 0, pwdata = 0, prdata;
  logic pready, pslverr;
  uc_instr_t code [NSLOTS];
  uc_loop_t  loops [NLOOPS];
  job_t      job;
  logic      job_valid, job_done = 0;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  xne_regfile dut (.clk_i(clk), .rst_ni(rst_n), .psel_i(psel), .penable_i(penable),
                   .pwrite_i(pwrite), .paddr_i(paddr), .pwdata_i(pwdata), .prdata_o(prdata),
                   .pready_o(pready), .pslverr_o(pslverr), .code_o(code), .loops_o(loops),
                   .job_o(job), .job_valid_o(job_valid), .job_done_i(job_done));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic apb_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = 32'(a); pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic apb_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = 32'(a);
    @(negedge clk); penable = 1;
    #0.5;
    check("pready", pready && !pslverr);
    d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  logic [7:0]  ref_code [NSLOTS];
  logic [7:0]  ref_loop [8];
  logic [31:0] ref_job  [2][10];
  logic [31:0] rd;
  localparam logic [7:0] JOB_ADDR [10] = '{REG_W_BASE, REG_X_BASE, REG_Y_BASE, REG_THR_BASE,
    REG_NIF, REG_NOF, REG_FS, REG_W_OUT, REG_H_OUT, REG_S_TAU};

  function automatic logic [31:0] job_field(job_t j, int f);
    case (f)
      0: return j.w_base;   1: return j.x_base;  2: return j.y_base;  3: return j.thr_base;
      4: return 32'(j.nif); 5: return 32'(j.nof); 6: return 32'(j.fs);
      7: return 32'(j.w_out); 8: return 32'(j.h_out); default: return 32'(j.s_tau);
    endcase
  endfunction

  function automatic logic [31:0] field_mask(int f);
    return (f < 4) ? 32'hffff_ffff : (f == 9) ? 32'(2**STAU_W - 1) : 32'(2**IDX_W - 1);
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    apb_read(REG_STATUS, rd);
    check("status after reset", rd == 0 && !job_valid);
    // microcode and loops
    for (int w = 0; w < NSLOTS / 4; w++) begin
      logic [31:0] d = $urandom;
      for (int b = 0; b < 4; b++) ref_code[4*w+b] = d[8*b +: 8];
      apb_write(REG_UCODE0 + 8'(4 * w), d);
    end
    for (int w = 0; w < 2; w++) begin
      logic [31:0] d = $urandom;
      for (int b = 0; b < 4; b++) ref_loop[4*w+b] = d[8*b +: 8];
      apb_write(REG_LOOPS0 + 8'(4 * w), d);
    end
    for (int w = 0; w < NSLOTS / 4; w++) begin
      apb_read(REG_UCODE0 + 8'(4 * w), rd);
      check($sformatf("ucode word %0d", w),
            rd == {ref_code[4*w+3], ref_code[4*w+2], ref_code[4*w+1], ref_code[4*w]});
    end
    for (int s = 0; s < NSLOTS; s++) check($sformatf("code_o %0d", s), code[s] == ref_code[s]);
    for (int l = 0; l < NLOOPS; l++) check($sformatf("loops_o %0d", l), loops[l] == ref_loop[l]);
    // two job contexts
    for (int c = 0; c < 2; c++) begin
      for (int f = 0; f < 10; f++) begin
        ref_job[c][f] = $urandom & field_mask(f);
        apb_write(JOB_ADDR[f], $urandom & ~field_mask(f) | ref_job[c][f]);
      end
      for (int f = 0; f < 10; f++) begin
        apb_read(JOB_ADDR[f], rd);
        check($sformatf("job %0d field %0d readback", c, f), rd == ref_job[c][f]);
      end
      apb_write(REG_TRIGGER, 1);
      apb_read(REG_STATUS, rd);
      check($sformatf("status after trigger %0d", c), rd == {29'b0, 1'b1, 2'(c + 1)});
    end
    check("job valid", job_valid);
    for (int f = 0; f < 10; f++) check($sformatf("run ctx 0 field %0d", f), job_field(job, f) == ref_job[0][f]);
    // a third trigger with both contexts full is dropped
    apb_write(REG_TRIGGER, 1);
    apb_read(REG_STATUS, rd);
    check("third trigger dropped", rd[1:0] == 2);
    // first job done: context 1 becomes the running one
    @(negedge clk); job_done = 1;
    @(negedge clk); job_done = 0;
    apb_read(REG_STATUS, rd);
    check("one pending", rd == {29'b0, 1'b1, 2'd1});
    for (int f = 0; f < 10; f++) check($sformatf("run ctx 1 field %0d", f), job_field(job, f) == ref_job[1][f]);
    // trigger in the same cycle as job_done with the write context full
    fork
      apb_write(REG_TRIGGER, 1);
      begin @(negedge clk); @(negedge clk); job_done = 1; @(negedge clk); job_done = 0; end
    join
    apb_read(REG_STATUS, rd);
    check("trigger together with done", rd == {29'b0, 1'b1, 2'd1});
    @(negedge clk); job_done = 1;
    @(negedge clk); job_done = 0;
    apb_read(REG_STATUS, rd);
    check("all done", rd == 0 && !job_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
