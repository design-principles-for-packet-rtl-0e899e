// payload_shifter: one output byte lane of the payload shifters.
//
// Multiplexer 1 (data) and multiplexer 3 (keep) pick the input lane whose byte belongs on
// this output lane for the packet's payload offset: input lane (LANE - offset) mod W. They
// have one input per distinct offset of the deparser graph, chosen by ctrl_idx. Their
// outputs are registered ("current"), and copied into a delay register when the beat moves
// on, so the delay register holds the previous beat's byte. Multiplexers 2 and 4 then take
// the delayed byte on lanes below the offset (dly_sel = 1) and the current byte elsewhere.
// On the first beat of a packet the delayed keep is forced to 0, so nothing of the previous
// packet leaks into the lanes that belong to the headers.
//
// Timing: inputs are sampled with en; out_data/out_keep follow the input beat by two enabled
// cycles. in_valid marks a real beat (bubbles do not touch the delay register). The split
// into two register stages is this design's choice.
module payload_shifter
  import deparser_pkg::*;
#(
  parameter cfg_e        CFG  = CFG_T1_PARSER_DAG,
  parameter int unsigned W    = 64,
  parameter int unsigned LANE = 0,
  localparam int unsigned NO  = n_offsets(CFG, W),
  localparam int unsigned OW  = (NO > 1) ? $clog2(NO) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic           in_valid,
  input  logic           in_first,
  input  logic [OW-1:0]  ctrl_idx,
  input  logic           dly_sel,
  input  logic [W*8-1:0] in_data,
  input  logic [W-1:0]   in_keep,
  output logic [7:0]     out_data,
  output logic           out_keep
);

  logic [7:0] m1_in [NO];
  logic       m3_in [NO];
  for (genvar o = 0; o < NO; o++) begin : g_in
    localparam int unsigned SRC = (LANE + W - offset_value(CFG, W, o)) % W;
    assign m1_in[o] = in_data[8*SRC +: 8];
    assign m3_in[o] = in_keep[SRC];
  end

  logic [7:0] m1;
  logic       m3;
  always_comb begin
    m1 = 8'h00;
    m3 = 1'b0;
    for (int o = 0; o < NO; o++) begin
      if (ctrl_idx == OW'(o)) begin
        m1 = m1_in[o];
        m3 = m3_in[o];
      end
    end
  end

  logic [7:0] cur_d, dly_d;
  logic       cur_k, dly_k, cur_v, cur_first, cur_sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_d <= 8'h00; cur_k <= 1'b0; cur_v <= 1'b0; cur_first <= 1'b0; cur_sel <= 1'b0;
      dly_d <= 8'h00; dly_k <= 1'b0;
      out_data <= 8'h00; out_keep <= 1'b0;
    end else if (en) begin
      cur_d     <= m1;
      cur_k     <= m3;
      cur_v     <= in_valid;
      cur_first <= in_first;
      cur_sel   <= dly_sel;
      if (cur_v) begin
        dly_d <= cur_d;
        dly_k <= cur_k;
      end
      out_data <= cur_sel ? dly_d : cur_d;
      out_keep <= cur_sel ? (dly_k && !cur_first) : cur_k;
    end
  end

endmodule
