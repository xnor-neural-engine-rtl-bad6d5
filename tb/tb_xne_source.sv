// tb_xne_source: a source reads runs of TP-bit vectors from the behavioural
// memory, with random grant stalls and a randomly stalling consumer; every
// vector must equal the TP/8 memory bytes from base + n*TP/8, for word-aligned
// bases and for bases at byte offsets 1, 2 and 3 (realigner). Without stalls
// a run of N vectors must stream at one vector per cycle (done within N + 5
// cycles; a misaligned run reads one extra vector).
module tb_xne_source;
  import xne_pkg::*;
  localparam int TP = 128, NP = TP / 32;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [31:0] base = 0;
  logic [IDX_W-1:0] nvec = 0;
  tcdm_req_t req [NP];
  tcdm_rsp_t rsp [NP];
  logic out_valid, out_ready = 0;
  logic [TP-1:0] out_data;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  xne_source #(.TP(TP), .DEPTH(4)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start),
    .base_i(base), .nvec_i(nvec), .busy_o(busy), .done_o(done),
    .tcdm_req_o(req), .tcdm_rsp_i(rsp),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));
  xne_tb_mem #(.NP(NP), .WORDS(4096)) i_mem (.clk_i(clk), .req_i(req), .rsp_o(rsp));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int unsigned b, int n, int stall, bit slow);
    int got = 0, cyc = 0;
    i_mem.stall_pct = stall;
    @(negedge clk);
    base = b; nvec = IDX_W'(n); start = 1;
    @(negedge clk);
    start = 0;
    while (got < n) begin
      out_ready = slow ? (($urandom % 2) == 0) : 1'b1;
      #0.5;
      if (out_valid && out_ready) begin
        logic [TP-1:0] exp;
        for (int k = 0; k < TP / 8; k++) begin
          int unsigned a = b + got * (TP / 8) + k;
          exp[8*k +: 8] = i_mem.mem[a >> 2][8*(a % 4) +: 8];
        end
        checks++;
        if (out_data != exp) begin failures++; $display("vector %0d: %h exp %h", got, out_data, exp); end
        got++;
      end
      @(negedge clk);
      cyc++;
      if (cyc > 10000) break;
    end
    out_ready = 0;
    while (busy) @(negedge clk);
    if (stall == 0 && !slow) begin
      checks++;
      if (cyc > n + 5) begin failures++; $display("%0d vectors took %0d cycles", n, cyc); end
    end
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) i_mem.mem[i] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(32'h100, 1, 0, 0);
    run(32'h200, 128, 0, 0);
    run(32'h40, 50, 30, 0);
    run(32'h800, 64, 0, 1);
    run(32'h1000, 100, 40, 1);
    run(32'h301, 1, 0, 0);
    run(32'h402, 60, 0, 0);
    run(32'h603, 30, 30, 1);
    for (int r = 0; r < 20; r++) run(32'h2000 + $urandom % 1024, 1 + $urandom % 20, $urandom % 40, 1'($urandom));
    checks++;
    if (i_mem.n_stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
