// tb_header_shifter: checks single header-shifter lanes against a reference packet.
//
// Lane 0 of a 128-bit bus on the simplified T1 graph must have exactly the 8 sub-DAG nodes
// of the worked example (Ethernet[0], IPv4[2], IPv4[18], TCP[14], IPv6[2], IPv6[18],
// IPv6[34], TCP[10]). Then three lanes (128-bit bus lanes 0 and 11 on the simplified graph,
// 64-bit bus lane 3 on the 32-path graph) are started on random PHVs and stepped through
// every beat; each beat's byte, valid and last flag is compared with the packet built here
// by concatenating the valid headers. Cycles with en low must leave the outputs unchanged.
module tb_header_shifter;
  import deparser_pkg::*;

  localparam int HSZ [5]  = '{14, 20, 40, 20, 8};
  localparam int HOFF [5] = '{0, 14, 34, 74, 94};
  localparam logic [4:0] FIG6 [7] = '{5'b00001, 5'b00011, 5'b01011, 5'b10011,
                                       5'b00101, 5'b01101, 5'b10101};
  localparam int NI = 3;
  localparam int IW [NI]   = '{16, 16, 8};
  localparam int ILN [NI]  = '{0, 11, 3};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic en, start, step;
  logic [PHV_BITS-1:0] phv_data;
  logic [N_HDRS-1:0]   phv_valid;
  logic [7:0] d [NI];
  logic       v [NI], l [NI];
  int checks = 0, failures = 0;

  header_shifter #(.CFG(CFG_T1_PARSER_DAG),   .W(16), .LANE(0))  u0 (.clk, .rst_n, .en, .start, .step, .phv_data, .phv_valid, .hdr_data(d[0]), .hdr_valid(v[0]), .hdr_last(l[0]));
  header_shifter #(.CFG(CFG_T1_PARSER_DAG),   .W(16), .LANE(11)) u1 (.clk, .rst_n, .en, .start, .step, .phv_data, .phv_valid, .hdr_data(d[1]), .hdr_valid(v[1]), .hdr_last(l[1]));
  header_shifter #(.CFG(CFG_T1_DEPARSER_DAG), .W(8),  .LANE(3))  u2 (.clk, .rst_n, .en, .start, .step, .phv_data, .phv_valid, .hdr_data(d[2]), .hdr_valid(v[2]), .hdr_last(l[2]));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  byte unsigned pkt [$];

  task automatic build(input logic [4:0] m, input logic [PHV_BITS-1:0] phv);
    pkt.delete();
    for (int h = 0; h < 5; h++)
      if (m[h]) for (int b = 0; b < HSZ[h]; b++) pkt.push_back(phv[8*(HOFF[h]+b) +: 8]);
  endtask

  // expected output of instance i for beat k
  task automatic expect_beat(input int i, input int k);
    int pos = k * IW[i] + ILN[i];
    bit ev = pos < pkt.size();
    chk(v[i] == ev, $sformatf("inst %0d beat %0d valid %0d exp %0d", i, k, v[i], ev));
    if (ev) begin
      chk(d[i] == pkt[pos], $sformatf("inst %0d beat %0d data %02x exp %02x", i, k, d[i], pkt[pos]));
      chk(l[i] == (pos + IW[i] >= pkt.size()), $sformatf("inst %0d beat %0d last", i, k));
    end
  endtask

  initial begin
    en = 1'b1; start = 1'b0; step = 1'b0; phv_data = '0; phv_valid = '0;
    // sub-DAG of lane 0, 128-bit bus
    chk(n_nodes(CFG_T1_PARSER_DAG, 16, 0) == 8,
        $sformatf("lane 0 / 128 bit has %0d nodes, exp 8", n_nodes(CFG_T1_PARSER_DAG, 16, 0)));
    chk(is_node(CFG_T1_PARSER_DAG, 16, 0, 0),       "Ethernet[0] not a node");
    chk(is_node(CFG_T1_PARSER_DAG, 16, 0, 14 + 2),  "IPv4[2] not a node");
    chk(is_node(CFG_T1_PARSER_DAG, 16, 0, 14 + 18), "IPv4[18] not a node");
    chk(is_node(CFG_T1_PARSER_DAG, 16, 0, 74 + 14), "TCP[14] not a node");
    chk(is_node(CFG_T1_PARSER_DAG, 16, 0, 34 + 2),  "IPv6[2] not a node");
    chk(is_node(CFG_T1_PARSER_DAG, 16, 0, 34 + 18), "IPv6[18] not a node");
    chk(is_node(CFG_T1_PARSER_DAG, 16, 0, 34 + 34), "IPv6[34] not a node");
    chk(is_node(CFG_T1_PARSER_DAG, 16, 0, 74 + 10), "TCP[10] not a node");
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 120; t++) begin
      logic [4:0] m;
      logic [PHV_BITS-1:0] phv;
      int nb;
      m = (t % 2 == 0) ? FIG6[(t / 2) % 7] : FIG6[$urandom_range(0, 6)];
      for (int b = 0; b < PHV_BYTES; b++) phv[8*b +: 8] = 8'($urandom);
      build(m, phv);
      nb = (pkt.size() + 7) / 8 + 1;
      @(negedge clk);
      phv_data = phv; phv_valid = m; start = 1'b1; step = 1'b0;
      for (int k = 0; k <= nb; k++) begin
        @(negedge clk);
        start = 1'b0; step = 1'b1;
        if (k > 0) for (int i = 0; i < NI; i++) expect_beat(i, k - 1);
        phv_valid = 5'($urandom);   // only sampled with start
        // occasional hold cycle
        if ($urandom_range(0, 5) == 0) begin
          logic [7:0] d0; logic v0;
          en = 1'b0; d0 = d[0]; v0 = v[0];
          @(negedge clk);
          chk(d[0] == d0 && v[0] == v0, "outputs changed while en was low");
          en = 1'b1;
        end
      end
    end
    // the 32-path lane on arbitrary valid vectors, including the empty one
    for (int t = 0; t < 64; t++) begin
      logic [4:0] m;
      logic [PHV_BITS-1:0] phv;
      m = 5'(t % 32);
      for (int b = 0; b < PHV_BYTES; b++) phv[8*b +: 8] = 8'($urandom);
      build(m, phv);
      @(negedge clk);
      phv_data = phv; phv_valid = m; start = 1'b1; step = 1'b0;
      for (int k = 0; k <= 14; k++) begin
        @(negedge clk);
        start = 1'b0; step = 1'b1;
        if (k > 0) expect_beat(2, k - 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
