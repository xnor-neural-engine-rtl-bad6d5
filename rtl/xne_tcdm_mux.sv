// xne_tcdm_mux: static TCDM multiplexer between two sets of master ports.
//
// sel_i chooses which of the two masters drives the NP shared ports; the
// other master sees no grants. Because read data comes back one cycle after
// the grant, the select of each port is registered when a request is granted
// and the response is steered with that registered value, so no response is
// lost if the controller flips sel_i right after the last grant. The
// controller is responsible for activating only one master at a time, as the
// paper requires; the mux itself has no arbitration.
module xne_tcdm_mux
  import xne_pkg::*;
#(
  parameter int unsigned NP = 4
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      sel_i,
  input  tcdm_req_t in_req_i  [2][NP],
  output tcdm_rsp_t in_rsp_o  [2][NP],
  output tcdm_req_t out_req_o [NP],
  input  tcdm_rsp_t out_rsp_i [NP]
);
  logic [NP-1:0] rsel_q;

  for (genvar p = 0; p < NP; p++) begin : g_port
    assign out_req_o[p] = in_req_i[sel_i][p];
    for (genvar m = 0; m < 2; m++) begin : g_m
      assign in_rsp_o[m][p].gnt     = out_rsp_i[p].gnt && (sel_i == 1'(m));
      assign in_rsp_o[m][p].r_valid = out_rsp_i[p].r_valid && (rsel_q[p] == 1'(m));
      assign in_rsp_o[m][p].r_data  = out_rsp_i[p].r_data;
    end
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)                                       rsel_q[p] <= 1'b0;
      else if (out_req_o[p].req && out_rsp_i[p].gnt)     rsel_q[p] <= sel_i;
    end
  end
endmodule
