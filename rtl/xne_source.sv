// xne_source: streamer source, turning a run of TP-bit vectors in memory into
// a valid/ready stream.
//
// On start_i the source latches a byte base address and a vector count.
// Vector n occupies the TP/8 bytes from base + n*TP/8. Memory is read in
// aligned raw vectors: raw vector r lives at A + r*TP/8 with A = base rounded
// down to a word, and its TP/32 words are requested in the same cycle on the
// TP/32 TCDM master ports (port p reads word p). A port that
// is not granted keeps its request up while the granted ports wait, so one
// vector is issued per cycle when the memory grants all ports. Read data is
// collected in one small FIFO per port (one cycle after the grant); a vector
// leaves on out_* once every port FIFO holds its word. A credit counter keeps
// at most DEPTH vectors issued but not yet consumed, so the port FIFOs never
// overflow. done_o pulses when the last vector has been accepted downstream.
//
// Realigner: when the base is not word aligned (offset o = base[1:0] bytes),
// one extra raw vector is read and output vector n is made of bytes o..o+TP/8-1
// of raw vectors n and n+1 concatenated; the first raw vector only fills the
// realigner's holding register. With an aligned base the raw vectors pass
// through unchanged.
//
// The paper gives the function (address generation and conversion of memory
// accesses into a stream over TP/32 32-bit ports); the lockstep issue, the
// credit scheme and the TCDM timing are this design's choices, and so is the
// way the realigner (which the paper names but does not describe) works.
module xne_source
  import xne_pkg::*;
#(
  parameter int unsigned TP    = 128,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             start_i,
  input  logic [31:0]      base_i,
  input  logic [IDX_W-1:0] nvec_i,
  output logic             busy_o,
  output logic             done_o,
  output tcdm_req_t        tcdm_req_o [TP/32],
  input  tcdm_rsp_t        tcdm_rsp_i [TP/32],
  output logic             out_valid_o,
  input  logic             out_ready_i,
  output logic [TP-1:0]    out_data_o
);
  localparam int unsigned NP = TP / 32;
  localparam int unsigned CRW = $clog2(DEPTH) + 1;

  logic             active_q;
  logic [31:0]      base_q;
  logic [IDX_W-1:0] nvec_q, nraw_q, n_iss_q, n_out_q;
  logic [1:0]       off_q;           // byte offset of the base within a word
  logic [TP-1:0]    raw_data, prev_q;
  logic             have_prev_q, raw_valid, fill;
  logic [CRW-1:0]   inflight_q;      // issued, not yet popped
  logic [NP-1:0]    granted_q;       // ports already granted for the current vector
  logic [NP-1:0]    req, gnt, fvalid;
  logic             can_issue, issue, pop;

  assign can_issue = active_q && (n_iss_q != nraw_q) && (inflight_q != CRW'(DEPTH));

  for (genvar p = 0; p < NP; p++) begin : g_port
    assign req[p] = can_issue && !granted_q[p];
    assign gnt[p] = tcdm_rsp_i[p].gnt;
    assign tcdm_req_o[p].req  = req[p];
    assign tcdm_req_o[p].add  = base_q + 32'(n_iss_q) * (TP / 8) + 32'(4 * p);
    assign tcdm_req_o[p].wen  = 1'b1;
    assign tcdm_req_o[p].be   = 4'hF;
    assign tcdm_req_o[p].data = '0;

    logic unused_rdy;
    xne_fifo #(.WIDTH(32), .DEPTH(DEPTH)) i_rfifo (
      .clk_i, .rst_ni, .clear_i(start_i),
      .in_valid_i (tcdm_rsp_i[p].r_valid),
      .in_ready_o (unused_rdy),
      .in_data_i  (tcdm_rsp_i[p].r_data),
      .out_valid_o(fvalid[p]),
      .out_ready_i(pop),
      .out_data_o (raw_data[32*p +: 32])
    );
  end

  assign issue       = can_issue && ((granted_q | (req & gnt)) == '1);
  // realigner
  logic [2*TP-1:0] pair;
  assign pair      = {raw_data, prev_q};
  assign raw_valid = active_q && (fvalid == '1);
  assign fill      = raw_valid && (off_q != '0) && !have_prev_q;
  always_comb begin
    unique case (off_q)
      2'd0:    out_data_o = raw_data;
      2'd1:    out_data_o = pair[8  +: TP];
      2'd2:    out_data_o = pair[16 +: TP];
      default: out_data_o = pair[24 +: TP];
    endcase
  end
  assign out_valid_o = raw_valid && ((off_q == '0) || have_prev_q);
  assign pop         = fill || (out_valid_o && out_ready_i);
  assign busy_o      = active_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q   <= 1'b0;
      base_q     <= '0;
      nvec_q     <= '0;
      nraw_q     <= '0;
      off_q      <= '0;
      prev_q     <= '0;
      have_prev_q <= 1'b0;
      n_iss_q    <= '0;
      n_out_q    <= '0;
      inflight_q <= '0;
      granted_q  <= '0;
      done_o     <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (start_i) begin
        active_q   <= (nvec_i != '0);
        done_o     <= (nvec_i == '0);
        base_q     <= {base_i[31:2], 2'b00};
        nvec_q     <= nvec_i;
        nraw_q     <= nvec_i + IDX_W'(base_i[1:0] != '0);
        off_q      <= base_i[1:0];
        have_prev_q <= 1'b0;
        n_iss_q    <= '0;
        n_out_q    <= '0;
        inflight_q <= '0;
        granted_q  <= '0;
      end else if (active_q) begin
        if (issue) begin
          n_iss_q   <= n_iss_q + 1'b1;
          granted_q <= '0;
        end else begin
          granted_q <= granted_q | (req & gnt);
        end
        inflight_q <= inflight_q + CRW'(issue) - CRW'(pop);
        if (pop) begin
          prev_q      <= raw_data;
          have_prev_q <= 1'b1;
        end
        if (out_valid_o && out_ready_i) begin
          n_out_q <= n_out_q + 1'b1;
          if (n_out_q + 1'b1 == nvec_q) begin
            active_q <= 1'b0;
            done_o   <= 1'b1;
          end
        end
      end
    end
  end

  a_start_idle: assert property (@(posedge clk_i) disable iff (!rst_ni) start_i |-> !active_q);
  a_out_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 out_valid_o && !out_ready_i |=> $stable(out_data_o));
endmodule
