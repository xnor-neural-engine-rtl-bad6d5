// tb_xne_fifo: checks the decoupling FIFO against a queue model.
// Random push/pop traffic on a DEPTH=4 FIFO; every popped word must equal the
// model's head, ready must be low exactly when the model holds DEPTH words,
// valid exactly when it is not empty. Also checks the clear input.
module tb_xne_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  always #1 clk = ~clk;
  xne_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 3) != 0;
      in_data   = W'($urandom);
      if (c == 1000) clear = 1;
      #0;
      checks++;
      if (in_ready != (q.size() < D) || out_valid != (q.size() > 0)) begin
        failures++; $display("flags wrong at %0d: size %0d", c, q.size());
      end
      if (out_valid && q.size() > 0) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("data %h exp %h", out_data, q[0]); end
      end
      @(posedge clk);
      if (clear) begin
        q = {};
      end else begin
        if (out_valid && out_ready) void'(q.pop_front());
        if (in_valid && in_ready) q.push_back(in_data);
      end
      #0 clear = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
