// tb_xne_sink: the sink writes single TP-bit vectors, nwords = 1..TP/32 words,
// with random grant stalls, at word-aligned and byte-misaligned addresses.
// Memory is checked byte by byte over the written range plus one word on each
// side: exactly the 4*nwords bytes from the base address must hold the vector
// and every byte around them must be untouched. Unstalled aligned writes must
// complete in one cycle, unstalled misaligned ones that need a second beat in
// two.
module tb_xne_sink;
  import xne_pkg::*;
  localparam int TP = 128, NP = TP / 32;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [31:0] base = 0;
  logic [IDX_W-1:0] nwords = 0;
  tcdm_req_t req [NP];
  tcdm_rsp_t rsp [NP];
  logic in_valid = 0, in_ready;
  logic [TP-1:0] in_data = 0;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  xne_sink #(.TP(TP)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .base_i(base),
    .nwords_i(nwords), .busy_o(busy), .done_o(done), .tcdm_req_o(req), .tcdm_rsp_i(rsp),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data));
  xne_tb_mem #(.NP(NP), .WORDS(1024)) i_mem (.clk_i(clk), .req_i(req), .rsp_o(rsp));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) i_mem.mem[i] = 32'hdeadbeef;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      automatic int unsigned b = 4 * (5 * r) + 4 + ((r < 100) ? 0 : $urandom % 4);
      automatic int nw = 1 + (r % NP);
      automatic int cyc = 0;
      automatic int extra = ((b % 4) != 0 && nw == NP) ? 1 : 0;
      i_mem.stall_pct = (r % 2) ? 30 : 0;
      @(negedge clk);
      base = b; nwords = IDX_W'(nw); start = 1;
      @(negedge clk);
      start = 0;
      repeat ($urandom % 3) @(negedge clk);
      in_valid = 1; in_data = {$urandom, $urandom, $urandom, $urandom};
      #0.5;
      while (!in_ready) begin @(negedge clk); #0.5; cyc++; end
      @(negedge clk);
      in_valid = 0;
      while (busy) @(negedge clk);
      @(negedge clk);
      for (int a = int'(b) - 4; a < int'(b) + 4 * nw + 4; a++) begin
        automatic logic [7:0] got = i_mem.mem[a / 4][8 * (a % 4) +: 8];
        automatic logic [7:0] exp = (a >= int'(b) && a < int'(b) + 4 * nw) ?
                                    in_data[8 * (a - int'(b)) +: 8] : 8'(32'hdeadbeef >> (8 * (a % 4)));
        checks++;
        if (got != exp) begin
          failures++; if (failures < 10) $display("run %0d base %h byte %0d: %h, want %h", r, b, a, got, exp);
        end
      end
      for (int w = b / 4 - 1; w < b / 4 + NP + 2; w++) i_mem.mem[w] = 32'hdeadbeef;
      if (r % 2 == 0) begin
        checks++;
        if (cyc != extra) begin failures++; $display("unstalled write took %0d extra cycles", cyc); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
