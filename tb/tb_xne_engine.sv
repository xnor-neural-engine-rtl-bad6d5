// tb_xne_engine: exercises the datapath with direct stream drivers (TP=128).
// For random n_in/n_acc it runs several ACCUM commands (feature vector plus
// n_acc weight vectors) and one THRESH command, then compares the output
// vector with a model: acc[k] += 2*popcount(~(f^w[k]) & mask) - n_in with
// 16-bit saturation, y[k] = sgn ? acc <= tau<<<s : acc >= tau<<<s, y[k]=0 for
// k >= n_acc. Also reproduces the numbers printed in the paper's datapath
// example (TP=8 slice: contribution +2), drives the accumulators into both
// saturation limits, and checks that an ACCUM with always-valid streams takes
// 1 + n_acc cycles.
module tb_xne_engine;
  import xne_pkg::*;
  localparam int TP = 128, NB = TP / 8;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done;
  eng_cmd_t cmd;
  logic [STAU_W-1:0] s_tau = 0;
  logic feat_valid = 0, feat_ready, wt_valid = 0, wt_ready, out_valid, out_ready = 0;
  logic [TP-1:0] feat_data = 0, wt_data = 0, out_data;
  int checks = 0, failures = 0, n_sat = 0;
  int acc [TP];

  always #1 clk = ~clk;
  xne_engine #(.TP(TP)) dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid),
    .cmd_ready_o(cmd_ready), .cmd_i(cmd), .s_tau_i(s_tau), .done_o(done),
    .feat_valid_i(feat_valid), .feat_ready_o(feat_ready), .feat_data_i(feat_data),
    .wt_valid_i(wt_valid), .wt_ready_o(wt_ready), .wt_data_i(wt_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [TP-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // one ACCUM; weights[k] for k < n_acc; gaps inserts random invalid cycles
  task automatic accum(int n_in, int n_acc, logic [TP-1:0] f, logic [TP-1:0] w [TP], bit gaps,
                       output int cycles);
    logic [TP-1:0] mask;
    int k = 0, t0;
    mask = '0;
    for (int b = 0; b < n_in; b++) mask[b] = 1'b1;
    @(negedge clk);
    cmd = '{op: ENG_ACCUM, n_acc: IDX_W'(n_acc), n_in: IDX_W'(n_in)};
    cmd_valid = 1; feat_valid = 1; feat_data = f;
    t0 = $time;
    @(negedge clk);
    cmd_valid = 0;
    while (!feat_ready) @(negedge clk);
    @(negedge clk);
    feat_valid = 0;
    while (k < n_acc) begin
      wt_valid = gaps ? (($urandom % 2) == 0) : 1'b1;
      wt_data  = w[k];
      #0;
      if (wt_valid && wt_ready) begin
        int c = 2 * $countones(~(f ^ w[k]) & mask) - n_in;
        acc[k] += c;
        if (acc[k] > 32767)  begin acc[k] = 32767;  n_sat++; end
        if (acc[k] < -32768) begin acc[k] = -32768; n_sat++; end
        k++;
      end
      @(negedge clk);
    end
    wt_valid = 0;
    cycles = ($time - t0) / 2;
  endtask

  task automatic thresh(int n_acc, logic [7:0] thr [TP]);
    int v = 0;
    logic [TP-1:0] exp;
    exp = '0;
    for (int k = 0; k < n_acc; k++) begin
      int tau = (thr[k][6] ? -int'(thr[k][5:0]) : int'(thr[k][5:0])) <<< s_tau;
      exp[k] = thr[k][7] ? (acc[k] <= tau) : (acc[k] >= tau);
    end
    @(negedge clk);
    cmd = '{op: ENG_THRESH, n_acc: IDX_W'(n_acc), n_in: '0};
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (v < (n_acc + NB - 1) / NB) begin
      wt_valid = 1;
      for (int b = 0; b < NB; b++) wt_data[8*b +: 8] = thr[v*NB + b];
      #0;
      if (wt_ready) v++;
      @(negedge clk);
    end
    wt_valid = 0;
    while (!out_valid) @(negedge clk);
    repeat ($urandom % 3) @(negedge clk);   // hold off the consumer
    checks++;
    if (out_data !== exp) begin
      failures++;
      $display("output %h expected %h (n_acc %0d)", out_data, exp, n_acc);
    end
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    for (int k = 0; k < TP; k++) acc[k] = 0;
  endtask

  logic [TP-1:0] w [TP];
  logic [7:0] thr [TP];
  int cyc;

  initial begin
    for (int k = 0; k < TP; k++) acc[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // paper example, TP=8 slice printed most significant bit first:
    // feat 0,1,0,0,1,0,1,1  weight 0,0,1,0,0,0,1,1  mask 0,0,1,1,1,1,1,1
    // (six unmasked bits) -> popcount contribution +2
    for (int k = 0; k < TP; k++) w[k] = '0;
    w[0] = TP'(8'b0010_0011);
    accum(6, 1, TP'(8'b0100_1011), w, 1'b0, cyc);
    checks++;
    if (dut.acc_q[0] != 16'sd2) begin failures++; $display("example acc %0d, expected +2", dut.acc_q[0]); end
    thresh(1, thr);

    // random commands
    for (int r = 0; r < 12; r++) begin
      automatic int n_in  = (r % 3 == 0) ? TP : 32 * (1 + $urandom % 4);
      automatic int n_acc = (r % 2 == 0) ? TP : 32 * (1 + $urandom % 4);
      s_tau = STAU_W'(r % 4);
      for (int a = 0; a < 3; a++) begin
        for (int k = 0; k < TP; k++) w[k] = rnd();
        accum(n_in, n_acc, rnd(), w, r[0], cyc);
        if (!r[0]) begin
          checks++;
          if (cyc != 1 + n_acc + 1) begin failures++; $display("ACCUM took %0d cycles, n_acc %0d", cyc, n_acc); end
        end
      end
      for (int k = 0; k < TP; k++) thr[k] = {1'($urandom), 7'($urandom % 48) - 7'd24};
      thresh(n_acc, thr);
    end

    // saturation, both directions: all-match on even, all-mismatch on odd lanes
    s_tau = 9;
    for (int k = 0; k < TP; k++) begin
      w[k] = k[0] ? '1 : '0;
      thr[k] = k[0] ? 8'h7f : 8'h00;   // tau -1 (-512) / 0, sign(lambda)=0
    end
    for (int a = 0; a < 260; a++) accum(TP, TP, '0, w, 1'b0, cyc);
    checks++;
    if (dut.acc_q[0] != 16'sh7fff || dut.acc_q[1] != 16'sh8000) begin
      failures++; $display("saturation: %0d %0d", dut.acc_q[0], dut.acc_q[1]);
    end
    thresh(TP, thr);
    checks++;
    if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
