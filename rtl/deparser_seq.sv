// deparser_seq: frame sequencer of the deparser (PHV input slot, Start, beat issue).
//
// PHVs pass through two slots: stage 1 holds the valid vector as received, and on the move
// to stage 2 the packet's control word is looked up in payload_ctrl_cam and stored with it
// (the PHV data follows in the top level's two buffers, loaded with phv_tready/phv_move).
// Both slots move like a two-stage pipeline, so one PHV per cycle can be taken. From stage
// 2 the sequencer issues the packet's output beats, at most one per enabled cycle:
//   - beats 0 .. q-1 (q = floor(L/W), L the header length) carry headers only;
//   - from beat q on, a packet with payload consumes one payload beat per output beat;
//     the beat that consumes payload tlast is the packet's last unless the shifted bytes
//     spill past the bus, in which case one more "flush" beat emits the delayed bytes;
//   - a packet without payload ends with beat ceil(L/W)-1.
// The first beat of a packet is issued together with start, so the header state machines
// load their first node with it; a new packet may start in the cycle right after the last
// beat of the previous one. A packet whose first beat needs a payload beat that is not yet
// there waits. A PHV with no headers and no payload is dropped. bad_phv pulses when a PHV
// whose valid vector is on no path of the graph starts (it is sent with no headers).
//
// Timing: PHV accepted in cycle t -> in stage 2 with its control word at the end of t+1 ->
// first beat issued in t+2 at the earliest. Issue requires en (the output can take data);
// s_tready is only raised in a cycle that issues a beat consuming that payload beat.
// Flow control, the flush beat and the dropping rules are this design's choices.
module deparser_seq
  import deparser_pkg::*;
#(
  parameter cfg_e        CFG = CFG_T1_PARSER_DAG,
  parameter int unsigned W   = 64,
  localparam int unsigned NO = n_offsets(CFG, W),
  localparam int unsigned OW = (NO > 1) ? $clog2(NO) : 1,
  localparam int unsigned BW = $clog2(PHV_BYTES + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  // PHV handshake (valid vector and payload flag; the data is buffered outside)
  input  logic              phv_tvalid,
  output logic              phv_tready,
  output logic              phv_move,    // stage-1 PHV moves to stage 2 (data buffers follow)
  input  logic [N_HDRS-1:0] phv_valid,
  input  logic              phv_has_payload,
  // payload stream handshake and the fields needed to decide on a flush beat
  input  logic              s_tvalid,
  output logic              s_tready,
  input  logic              s_tlast,
  input  logic [W-1:0]      s_tkeep,
  // issued beat
  output logic              tok_valid,
  output logic              tok_first,   // = start of the header state machines
  output logic              tok_last,
  output logic              tok_has_pay,
  output logic              tok_pay_new,
  output logic [OW-1:0]     tok_ctrl_idx,
  output logic [W-1:0]      tok_dly_sel,
  output logic [N_HDRS-1:0] start_valid, // valid vector of the packet being started
  output logic              bad_phv
);

  typedef struct packed {
    logic          hit;
    logic [OW-1:0] off_idx;
    logic [W-1:0]  dly_sel;
    logic [BW-1:0] hdr_beats;
    logic [BW-1:0] q_beats;
  } ctrl_t;

  // ---- PHV slots: stage 1 (as received) and stage 2 (with its control word) ----
  logic              s1_full, s1_has_pay, s2_full, s2_has_pay;
  logic [N_HDRS-1:0] s1_valid, s2_valid;
  ctrl_t             s2_ctrl, cam;

  payload_ctrl_cam #(.CFG(CFG), .W(W)) u_cam (
    .phv_valid(s1_valid),
    .hit      (cam.hit),
    .off_idx  (cam.off_idx),
    .dly_sel  (cam.dly_sel),
    .hdr_beats(cam.hdr_beats),
    .q_beats  (cam.q_beats)
  );

  // ---- active packet ----
  logic          busy, a_has_pay, pay_done, flush_pend;
  ctrl_t         a_ctrl;
  logic [BW-1:0] k;

  logic          use_new, empty_pkt, need_pay, issue, take, flush_req;
  logic          c_has_pay, c_pd, c_fp;
  ctrl_t         c;
  logic [BW-1:0] c_k;
  logic [W-1:0]  hi_mask;

  always_comb begin
    use_new   = !busy && s2_full;
    c         = busy ? a_ctrl : s2_ctrl;
    c_has_pay = busy ? a_has_pay : s2_has_pay;
    c_k       = busy ? k : '0;
    c_pd      = busy && pay_done;
    c_fp      = busy && flush_pend;
    empty_pkt = use_new && (s2_ctrl.hdr_beats == '0) && !s2_has_pay;
    need_pay  = c_has_pay && !c_pd && (c_k >= c.q_beats);
    issue     = en && (busy || (use_new && !empty_pkt)) && (!need_pay || s_tvalid);
    take      = (issue && use_new) || empty_pkt;
    // payload lanes at or above W-off spill into the next beat
    for (int j = 0; j < W; j++) hi_mask[j] = c.dly_sel[W-1-j];
    flush_req = s_tlast && |(s_tkeep & hi_mask);

    tok_valid    = issue;
    tok_first    = issue && use_new;
    tok_has_pay  = c_has_pay;
    tok_pay_new  = issue && need_pay;
    tok_ctrl_idx = c.off_idx;
    tok_dly_sel  = c.dly_sel;
    if (c_fp)          tok_last = 1'b1;
    else if (need_pay) tok_last = s_tlast && !flush_req;
    else               tok_last = !c_has_pay && (c_k == c.hdr_beats - 1'b1);
    s_tready     = issue && need_pay;
    phv_move     = s1_full && (!s2_full || take);
    phv_tready   = !s1_full || phv_move;
    start_valid  = s2_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_full <= 1'b0; s1_has_pay <= 1'b0; s1_valid <= '0;
      s2_full <= 1'b0; s2_has_pay <= 1'b0; s2_valid <= '0; s2_ctrl <= '0;
      busy <= 1'b0; a_has_pay <= 1'b0; pay_done <= 1'b0; flush_pend <= 1'b0;
      a_ctrl <= '0; k <= '0; bad_phv <= 1'b0;
    end else begin
      // PHV slots
      if (phv_tvalid && phv_tready) begin
        s1_valid   <= phv_valid;
        s1_has_pay <= phv_has_payload;
      end
      if (phv_move) begin
        s2_valid   <= s1_valid;
        s2_has_pay <= s1_has_pay;
        s2_ctrl    <= cam;
      end
      s1_full <= (phv_tvalid && phv_tready) || (s1_full && !phv_move);
      s2_full <= phv_move || (s2_full && !take);
      bad_phv <= take && !s2_ctrl.hit;

      // active packet
      if (issue) begin
        if (use_new) begin
          a_ctrl    <= s2_ctrl;
          a_has_pay <= s2_has_pay;
        end
        k          <= (c_k == '1) ? c_k : c_k + 1'b1;
        pay_done   <= c_pd || (need_pay && s_tlast);
        flush_pend <= need_pay && flush_req;
        busy       <= !tok_last;
      end
    end
  end

endmodule
