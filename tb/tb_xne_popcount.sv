// tb_xne_popcount: compares the popcount tree with $countones on corner
// cases (all zeros, all ones, single bits) and random 128-bit vectors.
module tb_xne_popcount;
  localparam int N = 128;
  logic [N-1:0] in;
  logic [$clog2(N):0] cnt;
  int checks = 0, failures = 0;
  xne_popcount #(.N(N)) dut (.in_i(in), .count_o(cnt));

  task automatic t(logic [N-1:0] v);
    in = v;
    #1;
    checks++;
    if (int'(cnt) != $countones(v)) begin
      failures++;
      $display("popcount(%h) = %0d, expected %0d", v, cnt, $countones(v));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    t('0);
    t('1);
    for (int b = 0; b < N; b++) t(N'(1) << b);
    for (int r = 0; r < 2000; r++) t({$urandom, $urandom, $urandom, $urandom} & {4{$urandom}});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
