// phv_shifters: builds the header part of every output beat from PHV_data and PHV_valid.
//
// One header_shifter per output byte lane (W lanes). At the start of a packet the PHV
// (data and valid vector) is copied into an active register that stays put while the
// packet's header beats are produced, so a new PHV can already wait in the input buffer.
// Each issued beat steps every lane's state machine once; lane j then supplies packet byte
// k*W+j of beat k, or nothing once that byte lies past the headers. This is Algorithm 1
// (each valid header appended right after the previous one) unrolled into W lane machines.
//
// phv_last is the frame's last-header flag: on the final header beat lane 0 always carries
// a header byte, and its state machine knows that it is at its last node, so lane 0's
// hdr_last is used (this design's choice of how per-lane "header last" is combined).
//
// Timing: start/step/en as in header_shifter. The outputs follow the state register by two
// enabled cycles (the lane's own output register, then one alignment register so that
// headers meet the payload shifters' output in the same cycle).
module phv_shifters
  import deparser_pkg::*;
#(
  parameter cfg_e        CFG = CFG_T1_PARSER_DAG,
  parameter int unsigned W   = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                start,
  input  logic                step,
  input  logic [PHV_BITS-1:0] phv_data,    // read only with start
  input  logic [N_HDRS-1:0]   phv_valid,   // read only with start
  output logic [W*8-1:0]      hdr_data,
  output logic [W-1:0]        hdr_keep,
  output logic                phv_last
);

  logic [PHV_BITS-1:0] act_data;
  logic [W*8-1:0]      lane_data;
  logic [W-1:0]        lane_valid, lane_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              act_data <= '0;
    else if (en && start)    act_data <= phv_data;
  end

  for (genvar j = 0; j < W; j++) begin : g_lane
    header_shifter #(.CFG(CFG), .W(W), .LANE(j)) u_hs (
      .clk      (clk),
      .rst_n    (rst_n),
      .en       (en),
      .start    (start),
      .step     (step),
      .phv_data (act_data),
      .phv_valid(phv_valid),
      .hdr_data (lane_data[8*j +: 8]),
      .hdr_valid(lane_valid[j]),
      .hdr_last (lane_last[j])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hdr_data <= '0;
      hdr_keep <= '0;
      phv_last <= 1'b0;
    end else if (en) begin
      hdr_data <= lane_data;
      hdr_keep <= lane_valid;
      phv_last <= lane_valid[0] && lane_last[0];
    end
  end

endmodule
