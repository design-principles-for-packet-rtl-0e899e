// payload_shifters: aligns the payload stream right behind the emitted headers.
//
// If the headers of a packet take L bytes, payload byte i must leave at packet byte L+i,
// i.e. on lane (L+i) mod W. With off = L mod W, output lane j takes input lane (j-off) mod W
// of the same payload beat when j >= off, and of the previous payload beat when j < off
// (Algorithm 2: insert the payload at position sum_sizes(PHV_valid)). This module holds W
// payload_shifter lanes that do exactly that, driven by the control word of the packet
// (ctrl_idx, dly_sel) from payload_ctrl_cam.
//
// Interface: each issued beat (tok_valid) enters a capture register together with its
// control word and flags. pay_new says whether a payload beat was consumed for this beat;
// if not (header-only beat, or the extra flush beat that empties the delay registers) the
// captured keep is all zero. tok_last marks the packet's final output beat and is delayed
// to pay_last. Outputs follow the issued beat by three enabled cycles.
module payload_shifters
  import deparser_pkg::*;
#(
  parameter cfg_e        CFG = CFG_T1_PARSER_DAG,
  parameter int unsigned W   = 64,
  localparam int unsigned NO = n_offsets(CFG, W),
  localparam int unsigned OW = (NO > 1) ? $clog2(NO) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic           tok_valid,
  input  logic           tok_first,
  input  logic           tok_last,
  input  logic           pay_new,
  input  logic [OW-1:0]  ctrl_idx,
  input  logic [W-1:0]   dly_sel,
  input  logic [W*8-1:0] s_tdata,
  input  logic [W-1:0]   s_tkeep,
  output logic [W*8-1:0] pay_data,
  output logic [W-1:0]   pay_keep,
  output logic           pay_last
);

  // Capture register (one per beat).
  logic [W*8-1:0] c_data;
  logic [W-1:0]   c_keep, c_dly;
  logic [OW-1:0]  c_idx;
  logic           c_valid, c_first, c_last, l4, l5;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_data <= '0; c_keep <= '0; c_dly <= '0; c_idx <= '0;
      c_valid <= 1'b0; c_first <= 1'b0; c_last <= 1'b0; l4 <= 1'b0; l5 <= 1'b0;
    end else if (en) begin
      c_data  <= s_tdata;
      c_keep  <= (tok_valid && pay_new) ? s_tkeep : '0;
      c_dly   <= dly_sel;
      c_idx   <= ctrl_idx;
      c_valid <= tok_valid;
      c_first <= tok_valid && tok_first;
      c_last  <= tok_valid && tok_last;
      l4      <= c_last;
      l5      <= l4;
    end
  end

  assign pay_last = l5;

  for (genvar j = 0; j < W; j++) begin : g_lane
    payload_shifter #(.CFG(CFG), .W(W), .LANE(j)) u_ps (
      .clk     (clk),
      .rst_n   (rst_n),
      .en      (en),
      .in_valid(c_valid),
      .in_first(c_first),
      .ctrl_idx(c_idx),
      .dly_sel (c_dly[j]),
      .in_data (c_data),
      .in_keep (c_keep),
      .out_data(pay_data[8*j +: 8]),
      .out_keep(pay_keep[j])
    );
  end

endmodule
