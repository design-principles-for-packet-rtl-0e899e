// payload_ctrl_cam: the small constant associative memory that drives the payload shifters.
//
// Each entry is one path of the deparser graph: its key is the PHV_valid value of the path,
// its data the control word for that header set. With L the path's total header length in
// bytes and W the bus width in bytes, the payload must start at byte offset L mod W of beat
// floor(L/W). The control word gives
//   off_idx  - select of payload multiplexers 1 and 3: index of L mod W in the list of the
//              distinct offsets the graph can produce (so those multiplexers only get as many
//              inputs as there are distinct offsets),
//   dly_sel  - one bit per lane, set for the lanes below the offset, which take the delayed
//              (previous-beat) payload byte through multiplexers 2 and 4,
//   hdr_beats / q_beats - ceil(L/W) and floor(L/W), used by the frame sequencer.
// A key that matches no entry gives hit = 0, a header length of zero and offset 0 (entry 0
// of the offset list is always offset 0 for that reason).
// The memory is purely combinational; its user registers the result.
module payload_ctrl_cam
  import deparser_pkg::*;
#(
  parameter cfg_e        CFG = CFG_T1_PARSER_DAG,
  parameter int unsigned W   = 64,
  localparam int unsigned NO  = n_offsets(CFG, W),
  localparam int unsigned OW  = (NO > 1) ? $clog2(NO) : 1,
  localparam int unsigned BW  = $clog2(PHV_BYTES + 1)
) (
  input  logic [N_HDRS-1:0] phv_valid,
  output logic              hit,
  output logic [OW-1:0]     off_idx,
  output logic [W-1:0]      dly_sel,
  output logic [BW-1:0]     hdr_beats,
  output logic [BW-1:0]     q_beats
);

  localparam int unsigned NP = n_paths(CFG);

  typedef struct packed {
    logic          hit;
    logic [OW-1:0] off_idx;
    logic [W-1:0]  dly_sel;
    logic [BW-1:0] hdr_beats;
    logic [BW-1:0] q_beats;
  } entry_t;

  entry_t row [NP];

  for (genvar p = 0; p < NP; p++) begin : g_entry
    localparam logic [N_HDRS-1:0] KEY = path_mask(CFG, p);
    localparam int unsigned       LEN = path_len(KEY);
    localparam int unsigned       OFF = LEN % W;
    entry_t data;
    always_comb begin
      data.hit       = 1'b1;
      data.off_idx   = OW'(offset_index(CFG, W, OFF));
      data.hdr_beats = BW'((LEN + W - 1) / W);
      data.q_beats   = BW'(LEN / W);
      for (int j = 0; j < W; j++) data.dly_sel[j] = (j < OFF);
    end
    assign row[p] = (phv_valid == KEY) ? data : '0;
  end

  always_comb begin
    entry_t r;
    r = '0;
    for (int p = 0; p < NP; p++) r |= row[p];
    hit       = r.hit;
    off_idx   = r.off_idx;
    dly_sel   = r.dly_sel;
    hdr_beats = r.hdr_beats;
    q_beats   = r.q_beats;
  end

endmodule
