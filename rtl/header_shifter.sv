// header_shifter: one output byte lane of the PHV shifters.
//
// A packet's headers are laid out on the output bus W bytes per beat, so output lane LANE
// carries packet bytes LANE, LANE+W, LANE+2W, ... Over all paths of the deparser graph only
// a few PHV bytes can ever land on a given lane; these are the nodes of the lane's sub-DAG.
// The lane is a small state machine whose state is the current node, plus a multiplexer with
// one input per node that picks that node's PHV byte. The nodes, the start node of every
// path and every node-to-node transition are computed at elaboration from the graph in
// deparser_pkg, so the multiplexer has exactly as many inputs as the sub-DAG has nodes.
//
// State encoding (this design's choice): 0 = no header byte on this lane (end of the
// sub-DAG), b+1 = PHV byte b. A transition is taken according to which graph path the
// current phv_valid value selects; the paper labels edges with header validity conditions,
// and matching the whole valid vector against the path list is the general form of that.
// A phv_valid value that is on no path leaves the lane at state 0.
//
// Interface and timing:
//   start  - load the first node of the path selected by phv_valid (beat 0 of a packet);
//            the selected path is kept for the packet's later transitions
//   step   - advance to the next node (next beat of the same packet)
//   en     - pipeline advance; nothing changes while low
//   hdr_data/hdr_valid/hdr_last are registered: they describe the beat whose state was held
//   during the previous enabled cycle. hdr_last marks the lane's last node on this path.
//   phv_valid is sampled only with start. phv_data must hold the packet's PHV while its
//   beats are in the state register. Only the PHV bytes that are nodes of this lane are
//   read, so lint reports the other phv_data bits as unused; that is the point of the design.
module header_shifter
  import deparser_pkg::*;
#(
  parameter cfg_e        CFG  = CFG_T1_PARSER_DAG,
  parameter int unsigned W    = 64,   // output bus width in bytes
  parameter int unsigned LANE = 0     // output byte lane served
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                start,
  input  logic                step,
  input  logic [PHV_BITS-1:0] phv_data,
  input  logic [N_HDRS-1:0]   phv_valid,
  output logic [7:0]          hdr_data,
  output logic                hdr_valid,
  output logic                hdr_last
);

  localparam int unsigned NP      = n_paths(CFG);

  logic [NODE_W-1:0] state, nxt, first;
  logic [NP-1:0]     hit;     // path selected by phv_valid (used at start)
  logic [NP-1:0]     hit_q;   // path of the packet being emitted

  // Path decode and start node of each path.
  logic [NODE_W-1:0] first_of [NP];
  for (genvar p = 0; p < NP; p++) begin : g_path
    localparam logic [N_HDRS-1:0] MASK = path_mask(CFG, p);
    localparam int unsigned       S0   = node_at(MASK, LANE);
    assign hit[p]      = (phv_valid == MASK);
    assign first_of[p] = hit[p] ? NODE_W'(S0) : '0;
  end

  // One multiplexer input and one transition row per sub-DAG node.
  logic [NODE_W-1:0] nxt_of  [PHV_BYTES];
  logic [7:0]        byte_of [PHV_BYTES];
  for (genvar b = 0; b < PHV_BYTES; b++) begin : g_node
    if (is_node(CFG, W, LANE, b)) begin : g_used
      logic              sel;
      logic [NODE_W-1:0] row [NP];
      logic [NODE_W-1:0] acc;
      assign sel = (state == NODE_W'(b + 1));
      for (genvar p = 0; p < NP; p++) begin : g_edge
        localparam int unsigned NX = next_node(path_mask(CFG, p), W, b);
        assign row[p] = (sel && hit_q[p]) ? NODE_W'(NX) : '0;
      end
      always_comb begin
        acc = '0;
        for (int p = 0; p < NP; p++) acc |= row[p];
      end
      assign nxt_of[b]  = acc;
      assign byte_of[b] = sel ? phv_data[8*b +: 8] : 8'h00;
    end else begin : g_unused
      assign nxt_of[b]  = '0;
      assign byte_of[b] = 8'h00;
    end
  end

  logic [7:0] mux_out;
  always_comb begin
    nxt     = '0;
    first   = '0;
    mux_out = 8'h00;
    for (int b = 0; b < PHV_BYTES; b++) begin
      nxt     |= nxt_of[b];
      mux_out |= byte_of[b];
    end
    for (int p = 0; p < NP; p++) first |= first_of[p];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= '0;
      hit_q     <= '0;
      hdr_data  <= 8'h00;
      hdr_valid <= 1'b0;
      hdr_last  <= 1'b0;
    end else if (en) begin
      if (start) begin
        state <= first;
        hit_q <= hit;
      end else if (step) begin
        state <= nxt;
      end
      hdr_data  <= mux_out;
      hdr_valid <= (state != '0);
      hdr_last  <= (state != '0) && (nxt == '0);
    end
  end

endmodule
