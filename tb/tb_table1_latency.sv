// tb_table1_latency: worst-case header latency and back-to-back rate of the deparser.
//
// For a packet with L header bytes and a W-byte output bus the deparser should present its
// last header beat ceil(L/W) + 6 cycles after the PHV is taken, counting the cycle that takes
// the PHV and the cycle of that last beat. The worst case of the T1 protocol stack (Ethernet,
// IPv4, IPv6, TCP, UDP all valid: 14+20+40+20+8 = 102 bytes) is reached only with the
// non-optimized 32-path graph; with the 7-path graph the longest path has 74 bytes. This
// bench builds both graphs at 64, 128, 256 and 512 bits, sends the longest header stack of
// each without payload, and checks:
//   - the first beat 6 cycles after the PHV is taken;
//   - the last beat at ceil(L/W)+6 (the 32-path graph must give 19, 13, 10 and 8 cycles);
//   - the output bytes equal the PHV bytes in order, keep and tlast;
//   - a burst of 8 such PHVs leaves the output busy every cycle (one beat per cycle).
// Packets, the expected bytes and the expected cycle counts are computed here, not taken
// from the design.
module tb_table1_latency;
  import deparser_pkg::*;

  localparam int NCASE = 8;
  localparam int NBURST = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // bus width in bytes of case c (cases 0-3: 32-path graph, 4-7: 7-path graph)
  function automatic int case_w(int c);
    return 8 << (c % 4);
  endfunction

  logic [PHV_BITS-1:0] phv;
  int                  done [NCASE];

  for (genvar c = 0; c < NCASE; c++) begin : g_case
    localparam cfg_e        CFG = (c < 4) ? CFG_T1_DEPARSER_DAG : CFG_T1_PARSER_DAG;
    localparam int unsigned WB  = 8 << (c % 4);
    localparam int unsigned L   = (c < 4) ? 102 : 74;
    localparam int unsigned NB  = (L + WB - 1) / WB;
    localparam logic [N_HDRS-1:0] MASK = (c < 4) ? 5'b11111 : 5'b01101;

    logic                phv_tvalid, phv_tready, bad_phv;
    logic [WB*8-1:0]     m_tdata;
    logic [WB-1:0]       m_tkeep;
    logic                m_tlast, m_tvalid, s_tready;

    deparser #(.CFG(CFG), .DATA_WIDTH(WB * 8)) u_dut (
      .clk            (clk),
      .rst_n          (rst_n),
      .phv_tvalid     (phv_tvalid),
      .phv_tready     (phv_tready),
      .phv_data       (phv),
      .phv_valid      (MASK),
      .phv_has_payload(1'b0),
      .s_axis_tdata   ('0),
      .s_axis_tkeep   ('0),
      .s_axis_tlast   (1'b0),
      .s_axis_tvalid  (1'b0),
      .s_axis_tready  (s_tready),
      .m_axis_tdata   (m_tdata),
      .m_axis_tkeep   (m_tkeep),
      .m_axis_tlast   (m_tlast),
      .m_axis_tvalid  (m_tvalid),
      .m_axis_tready  (1'b1),
      .bad_phv        (bad_phv)
    );

    // expected packet: the valid headers' PHV bytes in emit order
    byte unsigned exp_b [L];
    initial begin
      int n = 0;
      for (int b = 0; b < PHV_BYTES; b++)
        if (MASK[hdr_of_byte(b)]) begin
          exp_b[n] = byte'(b * 7 + 3);
          n++;
        end
    end

    int acc_cyc [$];   // cycles in which PHVs were taken
    int beat, pkts, first_out, last_out;

    initial begin
      phv_tvalid = 1'b0;
      beat = 0; pkts = 0; first_out = -1; last_out = -1;
      done[c] = 0;
      @(posedge rst_n);
      // single packet: latency
      @(negedge clk);
      phv_tvalid = 1'b1;
      @(posedge clk);
      while (!phv_tready) @(posedge clk);
      acc_cyc.push_back(cyc);
      @(negedge clk);
      phv_tvalid = 1'b0;
      wait (pkts == 1);
      repeat (3) @(negedge clk);
      // burst: NBURST PHVs offered back to back
      phv_tvalid = 1'b1;
      for (int i = 0; i < NBURST; i++) begin
        @(posedge clk);
        while (!phv_tready) @(posedge clk);
        acc_cyc.push_back(cyc);
      end
      @(negedge clk);
      phv_tvalid = 1'b0;
      wait (pkts == 1 + NBURST);
      checks++;
      if (last_out - first_out + 1 != int'(NB) * NBURST) begin
        failures++;
        $display("FAIL case %0d: burst of %0d packets took %0d cycles, exp %0d", c, NBURST,
                 last_out - first_out + 1, NB * NBURST);
      end
      done[c] = 1;
    end

    always @(posedge clk) begin
      if (rst_n && m_tvalid) begin
        int t0;
        t0 = acc_cyc[0];
        for (int j = 0; j < int'(WB); j++) begin
          int pos;
          pos = beat * int'(WB) + j;
          checks++;
          if (m_tkeep[j] != (pos < int'(L))) begin
            failures++;
            $display("FAIL case %0d beat %0d lane %0d keep %0b", c, beat, j, m_tkeep[j]);
          end else if (pos < int'(L) && m_tdata[8*j +: 8] != exp_b[pos]) begin
            failures++;
            $display("FAIL case %0d beat %0d lane %0d data %h exp %h", c, beat, j,
                     m_tdata[8*j +: 8], exp_b[pos]);
          end
        end
        checks++;
        if (m_tlast != (beat == int'(NB) - 1)) begin
          failures++;
          $display("FAIL case %0d beat %0d tlast %0b", c, beat, m_tlast);
        end
        if (pkts == 0 && beat == 0) begin
          checks++;
          if (cyc - t0 != 6) begin
            failures++;
            $display("FAIL case %0d: first beat %0d cycles after the PHV, exp 6", c, cyc - t0);
          end
        end
        if (pkts == 0 && m_tlast) begin
          checks++;
          if (cyc - t0 + 1 != int'(NB) + 6) begin
            failures++;
            $display("FAIL case %0d (%0d bit, %0d B): latency %0d, exp %0d", c, WB * 8, L,
                     cyc - t0 + 1, NB + 6);
          end else begin
            $display("case %0d: %0d-path graph, %0d bit, %0d header bytes: latency %0d cycles",
                     c, n_paths(CFG), WB * 8, L, cyc - t0 + 1);
          end
        end
        if (pkts == 1 && beat == 0) first_out = cyc;
        if (m_tlast) begin
          void'(acc_cyc.pop_front());
          last_out = cyc;
          pkts++;
          beat = 0;
        end else begin
          beat++;
        end
      end
    end

    always @(posedge clk) begin
      if (rst_n && bad_phv) begin
        failures++;
        $display("FAIL case %0d: bad_phv for a path of the graph", c);
      end
    end
  end

  initial begin
    for (int b = 0; b < PHV_BYTES; b++) phv[8*b +: 8] = 8'(b * 7 + 3);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
  end

  // published worst-case latencies (32-path graph) for 64, 128, 256, 512 bit
  initial begin
    int table1 [4] = '{19, 13, 10, 8};
    for (int i = 0; i < 4; i++) begin
      checks++;
      if ((102 + case_w(i) - 1) / case_w(i) + 6 != table1[i]) begin
        failures++;
        $display("FAIL: formula gives %0d at %0d bit, published value %0d",
                 (102 + case_w(i) - 1) / case_w(i) + 6, case_w(i) * 8, table1[i]);
      end
    end
  end

  initial begin
    bit all;
    all = 1'b0;
    while (!all) begin
      @(posedge clk);
      all = 1'b1;
      for (int c = 0; c < NCASE; c++) if (done[c] == 0) all = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
