// xne_tb_mem: behavioural model of the shared TCDM memory seen by the XNE.
//
// Stands in for the cluster's SRAM/SCM banks and interconnect, which are not
// part of the accelerator. NP 32-bit word ports; a request is granted in the
// same cycle unless the model decides to stall it (probability STALL_PCT %,
// drawn per port and cycle with $urandom, to mimic contention with other
// masters); read data returns one cycle after the grant with r_valid. The
// array `mem` is word addressed (byte address >> 2) and is read and written
// directly by the testbenches. Counts granted and stalled requests.
module xne_tb_mem
  import xne_pkg::*;
#(
  parameter int unsigned NP        = 4,
  parameter int unsigned WORDS     = 1 << 18,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic      clk_i,
  input  tcdm_req_t req_i [NP],
  output tcdm_rsp_t rsp_o [NP]
);
  logic [31:0] mem [WORDS];
  int unsigned stall_pct = STALL_PCT;
  int unsigned n_grants = 0, n_stalls = 0, n_writes = 0;
  logic [NP-1:0] stall;

  always @(negedge clk_i) begin
    for (int p = 0; p < NP; p++) stall[p] = (($urandom % 100) < stall_pct);
  end

  logic [NP-1:0] rvalid_q;
  logic [31:0]   rdata_q [NP];

  for (genvar p = 0; p < NP; p++) begin : g_p
    assign rsp_o[p].gnt     = req_i[p].req && !stall[p];
    assign rsp_o[p].r_valid = rvalid_q[p];
    assign rsp_o[p].r_data  = rdata_q[p];
    always @(posedge clk_i) begin
      rvalid_q[p] <= 1'b0;
      if (req_i[p].req && !stall[p]) begin
        n_grants++;
        if (req_i[p].wen) begin
          rvalid_q[p] <= 1'b1;
          rdata_q[p]  <= mem[(req_i[p].add >> 2) % WORDS];
        end else begin
          n_writes++;
          for (int b = 0; b < 4; b++)
            if (req_i[p].be[b]) mem[(req_i[p].add >> 2) % WORDS][8*b +: 8] <= req_i[p].data[8*b +: 8];
        end
      end else if (req_i[p].req) begin
        n_stalls++;
      end
    end
  end

  initial begin
    stall = '0;
    for (int p = 0; p < NP; p++) begin
      rvalid_q[p] = 1'b0;
      rdata_q[p]  = '0;
    end
  end
endmodule
