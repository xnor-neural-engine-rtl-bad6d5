// tb_xne_tcdm_mux: drives random requests on both masters and random grants
// and responses on the shared side; the selected master's request must reach
// the output, only it may see grants, and each response must reach the
// master that was selected when the request was granted, also when the
// select flips in the cycle right after the grant.
module tb_xne_tcdm_mux;
  import xne_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0, sel = 0;
  tcdm_req_t in_req [2][NP];
  tcdm_rsp_t in_rsp [2][NP];
  tcdm_req_t out_req [NP];
  tcdm_rsp_t out_rsp [NP];
  int checks = 0, failures = 0, flips = 0;
  logic [NP-1:0] gsel, granted;
  always #1 clk = ~clk;
  xne_tcdm_mux #(.NP(NP)) dut (.clk_i(clk), .rst_ni(rst_n), .sel_i(sel),
    .in_req_i(in_req), .in_rsp_o(in_rsp), .out_req_o(out_req), .out_rsp_i(out_rsp));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    granted = '0;
    gsel = '0;
    for (int p = 0; p < NP; p++) begin
      out_rsp[p] = '0;
      for (int m = 0; m < 2; m++) in_req[m][p] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      // the select may change in the cycle of the response
      sel = (($urandom % 4) == 0) ? !sel : sel;
      if (granted != 0 && sel != gsel[0]) flips++;
      // response to last cycle's grants
      for (int p = 0; p < NP; p++) begin
        out_rsp[p].r_valid = granted[p];
        out_rsp[p].r_data  = $urandom;
      end
      #0.5;
      for (int p = 0; p < NP; p++) if (granted[p]) begin
        checks++;
        if (!in_rsp[gsel[p]][p].r_valid || in_rsp[!gsel[p]][p].r_valid ||
            in_rsp[gsel[p]][p].r_data != out_rsp[p].r_data) begin
          failures++; $display("response of port %0d misrouted", p);
        end
      end
      // new requests and grants
      for (int p = 0; p < NP; p++) begin
        for (int m = 0; m < 2; m++) in_req[m][p] = {1'($urandom), $urandom, 1'b1, 4'hf, $urandom};
        out_rsp[p].gnt = 1'($urandom);
      end
      #0.5;
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (out_req[p] != in_req[sel][p] || in_rsp[sel][p].gnt != out_rsp[p].gnt || in_rsp[!sel][p].gnt) begin
          failures++; if (failures < 4) $display("request path of port %0d wrong: sel %0d out %h in0 %h in1 %h g %b %b", p, sel, out_req[p], in_req[0][p], in_req[1][p], in_rsp[sel][p].gnt, out_rsp[p].gnt);
        end
        granted[p] = out_req[p].req && out_rsp[p].gnt;
        gsel[p] = sel;
      end
      @(posedge clk);
      #0.5;
      for (int p = 0; p < NP; p++) out_rsp[p].gnt = 0;
    end
    checks++;
    if (flips == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
