// deparser: P4 packet deparser tailored to one deparser graph.
//
// The deparser rebuilds an outgoing packet from the Packet Header Vector (PHV) produced by
// the parser and modified by the match-action stages, and from the packet payload that the
// parser forwarded. Only the headers whose validity bit is set are emitted, back to back in
// the fixed emit order, and the payload follows right after the last one. Instead of a
// generic barrel shifter or crossbar, every output byte lane has its own small state machine
// and multiplexer whose inputs are only the PHV bytes that can ever reach that lane
// (phv_shifters), and the payload is realigned by a per-lane rotation restricted to the
// offsets the graph can produce plus a one-beat delay register (payload_shifters). A
// selector merges both into the output stream.
//
// Interfaces
//   PHV:     phv_data (PHV_BYTES bytes, layout in deparser_pkg), phv_valid (one bit per
//            header), phv_has_payload; handshake phv_tvalid/phv_tready (this design's choice).
//   Payload: AXI4-stream slave s_axis_* (tdata/tkeep/tlast/tvalid/tready), first byte in lane
//            0, keep bits contiguous from lane 0; one payload stream per PHV with
//            phv_has_payload = 1, in PHV order.
//   Pkt_out: AXI4-stream master m_axis_*.
//   bad_phv: pulses when a PHV whose valid vector is not a path of the graph is sent (it goes
//            out without headers).
//
// Timing: a PHV accepted in cycle t gives its first output beat (tvalid) in cycle t+6 when
// nothing stalls; a packet with L header bytes then needs ceil(L/W) beats for its headers.
// The six register stages are: PHV input buffer, PHV with its control word, header state /
// payload capture, shifter multiplexers, payload delay select, selector output. The whole
// datapath behind the sequencer advances together (en), stalled while m_axis_tready is low
// with a beat waiting. One beat per cycle is sustained, also across packet boundaries.
module deparser
  import deparser_pkg::*;
#(
  parameter cfg_e        CFG        = CFG_T1_PARSER_DAG,
  parameter int unsigned DATA_WIDTH = 512,
  localparam int unsigned W         = DATA_WIDTH / 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // PHV from the match-action stages
  input  logic                  phv_tvalid,
  output logic                  phv_tready,
  input  logic [PHV_BITS-1:0]   phv_data,
  input  logic [N_HDRS-1:0]     phv_valid,
  input  logic                  phv_has_payload,
  // Payload from the parser
  input  logic [DATA_WIDTH-1:0] s_axis_tdata,
  input  logic [W-1:0]          s_axis_tkeep,
  input  logic                  s_axis_tlast,
  input  logic                  s_axis_tvalid,
  output logic                  s_axis_tready,
  // Pkt_out
  output logic [DATA_WIDTH-1:0] m_axis_tdata,
  output logic [W-1:0]          m_axis_tkeep,
  output logic                  m_axis_tlast,
  output logic                  m_axis_tvalid,
  input  logic                  m_axis_tready,
  output logic                  bad_phv
);

  localparam int unsigned NO = n_offsets(CFG, W);
  localparam int unsigned OW = (NO > 1) ? $clog2(NO) : 1;

  logic en;
  assign en = !m_axis_tvalid || m_axis_tready;

  // Stages 1 and 2: PHV data buffers, moving with the sequencer's PHV slots.
  logic [PHV_BITS-1:0] phv_buf1, phv_buf2;
  logic                phv_move;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phv_buf1 <= '0;
      phv_buf2 <= '0;
    end else begin
      if (phv_tvalid && phv_tready) phv_buf1 <= phv_data;
      if (phv_move)                 phv_buf2 <= phv_buf1;
    end
  end

  // Stage 2 and beat issue.
  logic              tok_valid, tok_first, tok_last, tok_has_pay, tok_pay_new;
  logic [OW-1:0]     tok_ctrl_idx;
  logic [W-1:0]      tok_dly_sel;
  logic [N_HDRS-1:0] start_valid;

  deparser_seq #(.CFG(CFG), .W(W)) u_seq (
    .clk            (clk),
    .rst_n          (rst_n),
    .en             (en),
    .phv_tvalid     (phv_tvalid),
    .phv_tready     (phv_tready),
    .phv_move       (phv_move),
    .phv_valid      (phv_valid),
    .phv_has_payload(phv_has_payload),
    .s_tvalid       (s_axis_tvalid),
    .s_tready       (s_axis_tready),
    .s_tlast        (s_axis_tlast),
    .s_tkeep        (s_axis_tkeep),
    .tok_valid      (tok_valid),
    .tok_first      (tok_first),
    .tok_last       (tok_last),
    .tok_has_pay    (tok_has_pay),
    .tok_pay_new    (tok_pay_new),
    .tok_ctrl_idx   (tok_ctrl_idx),
    .tok_dly_sel    (tok_dly_sel),
    .start_valid    (start_valid),
    .bad_phv        (bad_phv)
  );

  // Beat valid and payload flag travelling beside the datapath (stages 3 to 5).
  logic [2:0] v_pipe, hp_pipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_pipe  <= '0;
      hp_pipe <= '0;
    end else if (en) begin
      v_pipe  <= {v_pipe[1:0], tok_valid};
      hp_pipe <= {hp_pipe[1:0], tok_has_pay};
    end
  end

  // Stages 3 to 5: header and payload shifters.
  logic [DATA_WIDTH-1:0] hdr_data, pay_data;
  logic [W-1:0]          hdr_keep, pay_keep;
  logic                  phv_last, pay_last;

  phv_shifters #(.CFG(CFG), .W(W)) u_phv (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (en),
    .start    (tok_first),
    .step     (tok_valid && !tok_first),
    .phv_data (phv_buf2),
    .phv_valid(start_valid),
    .hdr_data (hdr_data),
    .hdr_keep (hdr_keep),
    .phv_last (phv_last)
  );

  payload_shifters #(.CFG(CFG), .W(W)) u_pay (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (en),
    .tok_valid(tok_valid),
    .tok_first(tok_first),
    .tok_last (tok_last && tok_has_pay),
    .pay_new  (tok_pay_new),
    .ctrl_idx (tok_ctrl_idx),
    .dly_sel  (tok_dly_sel),
    .s_tdata  (s_axis_tdata),
    .s_tkeep  (s_axis_tkeep),
    .pay_data (pay_data),
    .pay_keep (pay_keep),
    .pay_last (pay_last)
  );

  // Stage 6: selector.
  deparser_selector #(.W(W)) u_sel (
    .clk        (clk),
    .rst_n      (rst_n),
    .en         (en),
    .in_valid   (v_pipe[2]),
    .hdr_data   (hdr_data),
    .hdr_keep   (hdr_keep),
    .phv_last   (phv_last),
    .pay_data   (pay_data),
    .pay_keep   (pay_keep),
    .pay_last   (pay_last),
    .has_payload(hp_pipe[2]),
    .out_valid  (m_axis_tvalid),
    .out_data   (m_axis_tdata),
    .out_keep   (m_axis_tkeep),
    .out_last   (m_axis_tlast)
  );

  // AXI4-stream rules on the output: a presented beat stays until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (m_axis_tvalid && !m_axis_tready) |=>
        (m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tkeep) && $stable(m_axis_tlast));
  endproperty
  a_hold: assert property (p_hold);

  // Every output beat carries at least one byte.
  a_keep: assert property (@(posedge clk) disable iff (!rst_n) m_axis_tvalid |-> (m_axis_tkeep != '0));

endmodule
