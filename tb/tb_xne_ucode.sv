// tb_xne_ucode: microcode processor against a reference model.
//
// Each run draws random loop ranges (1..3), a random program of ADD/MV
// instructions (0..4 per loop, read-only and read/write sources) and random
// read-only register values, then steps the processor until it reports
// finished. After every step the loop indices and the four read/write
// registers are compared with a model of the step rule (innermost loop not at
// its end increments, inner loops reset, that loop's instructions run in
// order), and the number of steps must equal the product of the ranges minus
// one. A fixed run also checks one instruction per cycle while busy.
module tb_xne_ucode;
  import xne_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  uc_instr_t        code   [NSLOTS];
  uc_loop_t         loops  [NLOOPS];
  logic [IDX_W-1:0] ranges [NLOOPS];
  logic [31:0]      ro     [NRO];
  logic [31:0]      rw     [NRW];
  logic [IDX_W-1:0] idx    [NLOOPS];
  logic [NLOOPS-1:0] at_end;
  logic last, busy, finished;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  xne_ucode dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .step_i(step), .code_i(code),
                 .loops_i(loops), .ranges_i(ranges), .ro_i(ro), .rw_o(rw), .idx_o(idx),
                 .at_end_o(at_end), .last_o(last), .busy_o(busy), .finished_o(finished));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] m_rw [NRW];
  int          m_idx [NLOOPS];

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // one step of the reference model; returns the loop that moved, -1 at the end
  function automatic int model_step();
    int l = -1;
    for (int k = NLOOPS - 1; k >= 0; k--) if (m_idx[k] + 1 < int'(ranges[k])) l = k;
    if (l < 0) return -1;
    for (int k = 0; k < l; k++) m_idx[k] = 0;
    m_idx[l]++;
    for (int s = 0; s < int'(loops[l].nb_ops); s++) begin
      uc_instr_t   i = code[int'(loops[l].base) + s];
      logic [31:0] v = i.in_rw ? m_rw[i.in[1:0]] : ro[i.in];
      m_rw[i.out] = (i.op == UC_ADD) ? m_rw[i.out] + v : v;
    end
    return l;
  endfunction

  task automatic run(bit fixed);
    int steps = 0, total = 1, moved, cyc;
    @(negedge clk);
    for (int l = 0; l < NLOOPS; l++) begin
      ranges[l] = fixed ? IDX_W'(2) : IDX_W'(1 + $urandom % 3);
      total *= int'(ranges[l]);
    end
    for (int r = 0; r < NRO; r++) ro[r] = (r == 0) ? 0 : $urandom % 1000;
    for (int s = 0; s < NSLOTS; s++)
      code[s] = uc_instr_t'({1'($urandom), 2'($urandom), 1'($urandom), 4'($urandom % 8)});
    for (int l = 0; l < NLOOPS; l++) begin
      loops[l].base   = 5'(l * 5);
      loops[l].nb_ops = fixed ? 3'd4 : 3'($urandom % 5);
    end
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int r = 0; r < NRW; r++) m_rw[r] = 0;
    for (int l = 0; l < NLOOPS; l++) m_idx[l] = 0;
    forever begin
      #0.5;
      check("last flag", last == (steps == total - 1));
      step = 1;
      @(negedge clk);
      step = 0;
      moved = model_step();
      if (moved < 0) begin
        check("finished", finished);
        break;
      end
      steps++;
      cyc = 0;
      #0.5;
      while (busy) begin @(negedge clk); #0.5; cyc++; end
      if (fixed) check("one op per cycle", cyc == 4);
      for (int l = 0; l < NLOOPS; l++) check($sformatf("idx %0d", l), int'(idx[l]) == m_idx[l]);
      for (int r = 0; r < NRW; r++) check($sformatf("rw %0d", r), rw[r] == m_rw[r]);
      @(negedge clk);
    end
    check("step count", steps == total - 1);
  endtask

  initial begin
    foreach (ranges[l]) ranges[l] = 1;
    foreach (ro[r]) ro[r] = 0;
    foreach (code[s]) code[s] = '0;
    foreach (loops[l]) loops[l] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1);
    for (int k = 0; k < 60; k++) run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
