// xne_sink: streamer sink, writing the output activation stream to memory.
//
// On start_i the sink latches a byte address and the number of 32-bit words
// to write (1..TP/32). When a TP-bit vector arrives on in_*, its first
// 4*nwords bytes are written from that address. With a word-aligned address
// port p writes word p at base + 4p with all byte enables set. Otherwise
// (offset o = base[1:0]) the realigner shifts the data up by o bytes inside
// an aligned window of nwords+1 words and clears the byte enables outside the
// range; when that window is wider than the TP/32 ports, a second beat writes
// the last word on port 0. Ports that are not granted retry while granted
// ones wait; the vector is accepted (in_ready_o) in the cycle the last write
// of the last beat is granted, and done_o pulses one cycle later. One vector
// per start, matching one output tile per thresholding phase.
//
// The paper gives the function of the sink and names its realigner; the
// protocol details and the two-beat realignment are this design's own.
module xne_sink
  import xne_pkg::*;
#(
  parameter int unsigned TP = 128
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             start_i,
  input  logic [31:0]      base_i,
  input  logic [IDX_W-1:0] nwords_i,
  output logic             busy_o,
  output logic             done_o,
  output tcdm_req_t        tcdm_req_o [TP/32],
  input  tcdm_rsp_t        tcdm_rsp_i [TP/32],
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  logic [TP-1:0]    in_data_i
);
  localparam int unsigned NP = TP / 32;

  logic             active_q;
  logic [31:0]      base_q;            // word-aligned window start
  logic [1:0]       off_q;             // byte offset of the first byte
  logic [IDX_W-1:0] nwords_q;
  logic             beat_q, last_beat;
  logic [NP-1:0]    used, granted_q, req, gnt;
  logic             all_done;
  logic [TP+31:0]   shifted;           // data moved up by off_q bytes
  logic [IDX_W:0]   nwin;              // words in the aligned window

  assign shifted   = {32'b0, in_data_i} << (8 * off_q);
  assign nwin      = (IDX_W+1)'(nwords_q) + (IDX_W+1)'(off_q != '0);
  assign last_beat = beat_q || (nwin <= (IDX_W+1)'(NP));

  for (genvar p = 0; p < NP; p++) begin : g_port
    logic [IDX_W:0] w;                  // word index inside the window
    assign w       = beat_q ? (IDX_W+1)'(NP + p) : (IDX_W+1)'(p);
    assign used[p] = (w < nwin);
    assign req[p] = active_q && in_valid_i && used[p] && !granted_q[p];
    assign gnt[p] = tcdm_rsp_i[p].gnt;
    assign tcdm_req_o[p].req  = req[p];
    assign tcdm_req_o[p].add  = base_q + 32'(4 * w);
    assign tcdm_req_o[p].wen  = 1'b0;
    assign tcdm_req_o[p].data = beat_q ? shifted[TP +: 32] : shifted[32*p +: 32];
    for (genvar b = 0; b < 4; b++) begin : g_be
      logic [IDX_W+2:0] i;              // byte index inside the window
      assign i = (IDX_W+3)'(4 * w + b);
      assign tcdm_req_o[p].be[b] = (i >= (IDX_W+3)'(off_q)) &&
                                   (i < (IDX_W+3)'(off_q) + (IDX_W+3)'(4 * nwords_q));
    end
  end

  assign all_done   = ((granted_q | (req & gnt) | ~used) == '1);
  assign in_ready_o = active_q && in_valid_i && all_done && last_beat;
  assign busy_o     = active_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q  <= 1'b0;
      base_q    <= '0;
      off_q     <= '0;
      nwords_q  <= '0;
      beat_q    <= 1'b0;
      granted_q <= '0;
      done_o    <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (start_i) begin
        active_q  <= 1'b1;
        base_q    <= {base_i[31:2], 2'b00};
        off_q     <= base_i[1:0];
        nwords_q  <= nwords_i;
        beat_q    <= 1'b0;
        granted_q <= '0;
      end else if (active_q) begin
        if (in_ready_o) begin
          active_q  <= 1'b0;
          done_o    <= 1'b1;
          granted_q <= '0;
        end else if (active_q && in_valid_i && all_done) begin
          beat_q    <= 1'b1;             // first of two beats written
          granted_q <= '0;
        end else begin
          granted_q <= granted_q | (req & gnt);
        end
      end
    end
  end

  a_start_idle: assert property (@(posedge clk_i) disable iff (!rst_ni) start_i |-> !active_q);
endmodule
