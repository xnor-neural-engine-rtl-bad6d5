// tb_xne_seqmult: random and corner-case products; checks the result and
// that done arrives exactly W cycles after start.
module tb_xne_seqmult;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [31:0] a = 0, b = 0, p;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  xne_seqmult #(.W(32)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .a_i(a), .b_i(b),
                             .busy_o(busy), .done_o(done), .p_o(p));
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic mul(logic [31:0] x, logic [31:0] y);
    int n = 0;
    @(negedge clk); a = x; b = y; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); n++; end
    checks += 2;
    if (p != x * y) begin failures++; $display("%0d*%0d = %0d", x, y, p); end
    if (n != 32) begin failures++; $display("latency %0d", n); end
  endtask
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    mul(0, 5); mul(7, 0); mul(1, 1); mul(3, 48); mul(32'hffff, 32'hffff);
    for (int i = 0; i < 100; i++) mul($urandom % 70000, $urandom % 70000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
