// xne_engine: the XNE datapath (XNOR, masking, popcount, accumulation,
// thresholding and binarization).
//
// The engine executes the hardwired inner loops of a binary layer. An
// ENG_ACCUM command takes one TP-bit feature vector from the feature stream
// into the feature register and then consumes n_acc weight vectors, one per
// cycle: weight vector k is XNORed with the feature register, ANDed with the
// mask register (low n_in bits set), and the +-1 sum of the unmasked bits,
// 2*popcount - n_in, is added to accumulator k with 16-bit saturation. An
// ENG_THRESH command consumes ceil(8*n_acc/TP) threshold vectors from the same
// stream; each carries TP/8 threshold bytes {sign(lambda), tau sign, tau magnitude[5:0]} and
// binarizes TP/8 accumulators per cycle:
//   sign(lambda)=0: y = acc >= (tau <<< s_tau);  sign(lambda)=1: y = acc <= (tau <<< s_tau)
// The TP-bit output buffer (bits >= n_acc forced to 0) is then pushed on the
// output stream and all accumulators are cleared.
//
// Interface: valid/ready streams for features, weights/thresholds and
// outputs; a command port (cmd_valid/cmd_ready) accepted only when idle;
// done_o pulses for one cycle when a command completes.
// Timing: ACCUM takes 1 + n_acc cycles with no stalls, THRESH ceil(8n_acc/TP)+1.
//
// From the paper: XNOR/AND/popcount/accumulate structure, TP accumulators of
// 16 bits with saturation, 7-bit tau plus sign(lambda), S_tau shift, feature
// register reuse over min(TP, nof) cycles, clearing after thresholding. The
// +-1 sum follows the numbers printed in the paper's datapath figure. Own
// choices: byte bit order, TP/8 thresholds per cycle, flip-flop accumulators.
module xne_engine
  import xne_pkg::*;
#(
  parameter int unsigned TP = 128
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // command
  input  logic              cmd_valid_i,
  output logic              cmd_ready_o,
  input  eng_cmd_t          cmd_i,
  input  logic [STAU_W-1:0] s_tau_i,
  output logic              done_o,
  // feature stream
  input  logic              feat_valid_i,
  output logic              feat_ready_o,
  input  logic [TP-1:0]     feat_data_i,
  // weight / threshold stream
  input  logic              wt_valid_i,
  output logic              wt_ready_o,
  input  logic [TP-1:0]     wt_data_i,
  // output stream
  output logic              out_valid_o,
  input  logic              out_ready_i,
  output logic [TP-1:0]     out_data_o
);
  localparam int unsigned NB  = TP / 8;           // thresholds per vector
  localparam int unsigned PCW = $clog2(TP) + 1;   // popcount width
  localparam int unsigned CW  = $clog2(TP) + 1;   // counters
  localparam int unsigned TW  = ACC_W + 8;        // threshold compare width

  typedef enum logic [2:0] {S_IDLE, S_FEAT, S_ACC, S_THR, S_OUT} state_e;
  state_e state_q;

  logic [TP-1:0]                 feat_q, mask_q, out_q;
  logic signed [ACC_W-1:0]       acc_q [TP];
  logic [IDX_W-1:0]              n_acc_q, n_in_q;
  logic [CW-1:0]                 cnt_q;

  // ---------------------------------------------------------- XNOR + popcount
  logic [TP-1:0]  prod;
  logic [PCW-1:0] pc;
  assign prod = ~(feat_q ^ wt_data_i) & mask_q;
  xne_popcount #(.N(TP)) i_popcount (.in_i(prod), .count_o(pc));

  // +-1 contribution: matches minus mismatches among unmasked bits
  logic signed [PCW+1:0] contrib;
  assign contrib = $signed({1'b0, pc, 1'b0}) - $signed({2'b0, n_in_q[PCW-1:0]});

  function automatic logic signed [ACC_W-1:0] sat_add(logic signed [ACC_W-1:0] a,
                                                      logic signed [PCW+1:0]   b);
    logic signed [ACC_W:0] s;
    s = ACC_W'(0) + {a[ACC_W-1], a} + (ACC_W+1)'(b);
    if (s > $signed({2'b00, {(ACC_W-1){1'b1}}}))       return {1'b0, {(ACC_W-1){1'b1}}};
    else if (s < $signed({2'b11, {(ACC_W-1){1'b0}}}))  return {1'b1, {(ACC_W-1){1'b0}}};
    else                                               return s[ACC_W-1:0];
  endfunction

  // ---------------------------------------------------------- thresholding
  function automatic logic binarize(logic signed [ACC_W-1:0] acc, logic [7:0] thr,
                                    logic [STAU_W-1:0] sh);
    logic signed [TW-1:0] tau, diff;
    // tau is sign-magnitude: bit 6 sign, bits 5:0 magnitude
    tau  = (thr[6] ? -TW'(thr[5:0]) : TW'(thr[5:0])) <<< sh;
    diff = TW'(acc) - tau;
    return thr[7] ? (diff <= 0) : (diff >= 0);
  endfunction

  logic [NB-1:0] bin_vec;
  always_comb begin
    for (int b = 0; b < NB; b++) begin
      bin_vec[b] = binarize(acc_q[int'(cnt_q) * NB + b], wt_data_i[8*b +: 8], s_tau_i);
    end
  end

  logic [CW-1:0] n_thr;   // threshold vectors for n_acc outputs
  assign n_thr = CW'((32'(n_acc_q) + NB - 1) / NB);

  // ---------------------------------------------------------- control
  assign cmd_ready_o  = (state_q == S_IDLE);
  assign feat_ready_o = (state_q == S_FEAT);
  assign wt_ready_o   = (state_q == S_ACC) || (state_q == S_THR);
  assign out_valid_o  = (state_q == S_OUT);
  assign out_data_o   = out_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      feat_q  <= '0;
      mask_q  <= '0;
      out_q   <= '0;
      n_acc_q <= '0;
      n_in_q  <= '0;
      cnt_q   <= '0;
      done_o  <= 1'b0;
      for (int k = 0; k < TP; k++) acc_q[k] <= '0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (cmd_valid_i) begin
          n_acc_q <= cmd_i.n_acc;
          n_in_q  <= cmd_i.n_in;
          cnt_q   <= '0;
          for (int k = 0; k < TP; k++) mask_q[k] <= (IDX_W'(k) < cmd_i.n_in);
          state_q <= (cmd_i.op == ENG_ACCUM) ? S_FEAT : S_THR;
        end
        S_FEAT: if (feat_valid_i) begin
          feat_q  <= feat_data_i;
          state_q <= S_ACC;
        end
        S_ACC: if (wt_valid_i) begin
          acc_q[cnt_q[CW-2:0]] <= sat_add(acc_q[cnt_q[CW-2:0]], contrib);
          cnt_q        <= cnt_q + 1'b1;
          if (IDX_W'(cnt_q) == n_acc_q - 1'b1) begin
            state_q <= S_IDLE;
            done_o  <= 1'b1;
          end
        end
        S_THR: if (wt_valid_i) begin
          for (int b = 0; b < NB; b++) begin
            if (int'(cnt_q) * NB + b < int'(n_acc_q)) out_q[int'(cnt_q) * NB + b] <= bin_vec[b];
            else                                      out_q[int'(cnt_q) * NB + b] <= 1'b0;
          end
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == n_thr - 1'b1) state_q <= S_OUT;
        end
        S_OUT: if (out_ready_i) begin
          for (int k = 0; k < TP; k++) acc_q[k] <= '0;   // "XNOR CLEAR"
          out_q   <= '0;
          state_q <= S_IDLE;
          done_o  <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // rule of the valid/ready handshake: output data stable while stalled
  a_out_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                 out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_data_o));
endmodule
