// tb_payload_ctrl_cam: checks the control memory for every PHV_valid value.
//
// For three instances (512- and 128-bit bus on the simplified T1 graph, 64-bit bus on the
// 32-path graph) all 32 valid vectors are applied. Header lengths, the set of paths and
// the distinct payload offsets are worked out here from the header sizes; hit, the beat
// counts, the delayed-lane mask and the offset that off_idx selects are compared with them.
module tb_payload_ctrl_cam;
  import deparser_pkg::*;

  localparam int HSZ [5] = '{14, 20, 40, 20, 8};
  localparam logic [4:0] FIG6 [7] = '{5'b00001, 5'b00011, 5'b01011, 5'b10011,
                                       5'b00101, 5'b01101, 5'b10101};

  logic [4:0] key;
  logic        h0, h1, h2;
  logic [2:0]  o0;  logic [2:0] o1;  logic [2:0] o2;
  logic [63:0] s0;  logic [15:0] s1; logic [7:0] s2;
  logic [6:0]  hb0, q0, hb1, q1, hb2, q2;
  int checks = 0, failures = 0;

  payload_ctrl_cam #(.CFG(CFG_T1_PARSER_DAG),   .W(64)) u0 (.phv_valid(key), .hit(h0), .off_idx(o0), .dly_sel(s0), .hdr_beats(hb0), .q_beats(q0));
  payload_ctrl_cam #(.CFG(CFG_T1_PARSER_DAG),   .W(16)) u1 (.phv_valid(key), .hit(h1), .off_idx(o1), .dly_sel(s1), .hdr_beats(hb1), .q_beats(q1));
  payload_ctrl_cam #(.CFG(CFG_T1_DEPARSER_DAG), .W(8))  u2 (.phv_valid(key), .hit(h2), .off_idx(o2), .dly_sel(s2), .hdr_beats(hb2), .q_beats(q2));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic bit in_fig6(logic [4:0] m);
    for (int i = 0; i < 7; i++) if (FIG6[i] == m) return 1'b1;
    return 1'b0;
  endfunction

  task automatic check_one(input int cfg, input int w, input logic hit, input int oi,
                           input logic [63:0] sel, input int hb, input int q);
    bit on = (cfg == 1) || in_fig6(key);
    int len = 0, off;
    if (on) for (int h = 0; h < 5; h++) if (key[h]) len += HSZ[h];
    off = len % w;
    chk(hit == on, $sformatf("cfg %0d W=%0d key %b hit %0d", cfg, w, key, hit));
    chk(hb == (len + w - 1) / w, $sformatf("cfg %0d W=%0d key %b hdr_beats %0d", cfg, w, key, hb));
    chk(q == len / w, $sformatf("cfg %0d W=%0d key %b q_beats %0d", cfg, w, key, q));
    for (int j = 0; j < w; j++) chk(sel[j] == (j < off), $sformatf("cfg %0d W=%0d key %b dly_sel[%0d]", cfg, w, key, j));
    chk(offset_value(cfg_e'(cfg), w, oi) == off, $sformatf("cfg %0d W=%0d key %b off_idx %0d", cfg, w, key, oi));
  endtask

  initial begin
    // distinct offsets: {0} plus the path lengths mod W
    //   512 bit: 14 34 54 42 54 74%64=10 62 -> {0,14,34,54,42,10,62} = 7
    //   128 bit: 14 2 6 10 6 10 14 -> {0,14,2,6,10} = 5
    chk(n_offsets(CFG_T1_PARSER_DAG, 64) == 7, "512-bit offset count");
    chk(n_offsets(CFG_T1_PARSER_DAG, 16) == 5, "128-bit offset count");
    chk(n_offsets(CFG_T1_DEPARSER_DAG, 8) == 4, "64-bit 32-path offset count (all even)");
    for (int k = 0; k < 32; k++) begin
      key = 5'(k);
      #1;
      check_one(0, 64, h0, o0, s0, hb0, q0);
      check_one(0, 16, h1, o1, {48'h0, s1}, hb1, q1);
      check_one(1, 8,  h2, o2, {56'h0, s2}, hb2, q2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
