// tb_deparser_seq: checks the beat sequence issued by the frame sequencer (128-bit bus,
// simplified T1 graph).
//
// Random PHVs (some with valid vectors off the graph, some without payload) and their
// payload streams are offered with random gaps while en toggles at random. For each packet
// the issued beats are compared with the sequence worked out here: floor(L/W) header-only
// beats, one payload-consuming beat per payload beat, a flush beat when the shifted payload
// spills over, or ceil(L/W) beats without payload; first/last flags, the payload flag, the
// control word and the start valid vector must match. s_tready must equal a
// payload-consuming issue, nothing may issue with en low, and the first beat must be issued
// two cycles after the PHV is accepted when the sequencer is idle.
module tb_deparser_seq;
  import deparser_pkg::*;
  localparam int W = 16;
  localparam int N = 300;
  localparam int HSZ [5] = '{14, 20, 40, 20, 8};
  localparam logic [4:0] FIG6 [7] = '{5'b00001, 5'b00011, 5'b01011, 5'b10011,
                                       5'b00101, 5'b01101, 5'b10101};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic en, phv_tvalid, phv_tready, phv_move, phv_has_payload;
  logic [4:0] phv_valid, start_valid;
  logic s_tvalid, s_tready, s_tlast;
  logic [W-1:0] s_tkeep, tok_dly_sel;
  logic tok_valid, tok_first, tok_last, tok_has_pay, tok_pay_new, bad_phv;
  logic [2:0] tok_ctrl_idx;

  deparser_seq #(.CFG(CFG_T1_PARSER_DAG), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  logic [4:0] g_m [N];
  int g_len [N], g_plen [N];
  bit g_bad [N];

  function automatic bit in_fig6(logic [4:0] m);
    for (int i = 0; i < 7; i++) if (FIG6[i] == m) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin
      g_m[i] = ($urandom_range(0, 9) == 0) ? 5'($urandom_range(0, 31)) : FIG6[$urandom_range(0, 6)];
      g_bad[i] = !in_fig6(g_m[i]);
      g_len[i] = 0;
      if (!g_bad[i]) for (int h = 0; h < 5; h++) if (g_m[i][h]) g_len[i] += HSZ[h];
      g_plen[i] = ($urandom_range(0, 4) == 0) ? 0 : $urandom_range(1, 6 * W);
      if (g_len[i] == 0 && g_plen[i] == 0) g_plen[i] = 1;
    end
  end

  // PHV driver
  int pi;
  longint cyc;
  longint acc [$];
  always @(posedge clk) begin
    if (!rst_n) begin
      pi <= 0; phv_tvalid <= 1'b0; phv_valid <= '0; phv_has_payload <= 1'b0; cyc <= 0;
    end else begin
      int n;
      cyc <= cyc + 1;
      if (phv_tvalid && phv_tready) acc.push_back(cyc);
      n = (phv_tvalid && phv_tready) ? pi + 1 : pi;
      if (!phv_tvalid || phv_tready) begin
        pi <= n;
        phv_tvalid      <= (n < N) && ($urandom_range(0, 4) != 0);
        phv_valid       <= (n < N) ? g_m[n] : '0;
        phv_has_payload <= (n < N) && (g_plen[n] != 0);
      end
    end
  end

  // payload driver
  int yk, yb;
  always @(posedge clk) begin
    if (!rst_n) begin
      yk <= 0; yb <= 0; s_tvalid <= 1'b0; s_tlast <= 1'b0; s_tkeep <= '0;
    end else if (!s_tvalid || s_tready) begin
      int k, b;
      k = yk; b = yb;
      if (s_tvalid && s_tready) begin
        b += W;
        if (b >= g_plen[k]) begin k++; b = 0; end
      end
      while (k < N && g_plen[k] == 0) k++;
      yk <= k; yb <= b;
      s_tvalid <= (k < N) && ($urandom_range(0, 3) != 0);
      s_tlast  <= (k < N) && (b + W >= g_plen[k]);
      for (int j = 0; j < W; j++) s_tkeep[j] <= (k < N) && (b + j < g_plen[k]);
    end
  end

  always @(negedge clk) en = ($urandom_range(0, 4) != 0);

  // monitor
  int mp, mk, n_bad, n_flush, n_lat2;
  always @(posedge clk) begin
    if (rst_n) begin
      if (bad_phv) n_bad++;
      chk(s_tready == tok_pay_new, "s_tready differs from payload-consuming issue");
      if (tok_valid) begin
        int len, plen, q, npb, off, nt;
        bit fl;
        chk(en, "beat issued with en low");
        while (mp < N && g_len[mp] == 0 && g_plen[mp] == 0) mp++;
        len = g_len[mp]; plen = g_plen[mp];
        q = len / W; off = len % W; npb = (plen + W - 1) / W;
        fl = (plen > 0) && (off != 0) && (((plen - 1) % W) + off >= W);
        nt = (plen > 0) ? q + npb + int'(fl) : (len + W - 1) / W;
        chk(tok_first == (mk == 0), $sformatf("pkt %0d beat %0d first", mp, mk));
        chk(tok_last == (mk == nt - 1), $sformatf("pkt %0d beat %0d last (exp %0d beats)", mp, mk, nt));
        chk(tok_has_pay == (plen > 0), $sformatf("pkt %0d has_pay", mp));
        chk(tok_pay_new == (plen > 0 && mk >= q && mk < q + npb), $sformatf("pkt %0d beat %0d pay_new", mp, mk));
        chk(offset_value(CFG_T1_PARSER_DAG, W, tok_ctrl_idx) == off, $sformatf("pkt %0d offset", mp));
        for (int j = 0; j < W; j++) chk(tok_dly_sel[j] == (j < off), "dly_sel");
        if (mk == 0) begin
          chk(start_valid == g_m[mp], "start_valid");
          if (acc.size() > mp && cyc - acc[mp] == 2) n_lat2++;
          chk(acc.size() > mp && cyc - acc[mp] >= 2, "first beat earlier than two cycles after accept");
        end
        if (fl && mk == nt - 1) n_flush++;
        if (mk == nt - 1) begin mk = 0; mp++; end
        else mk++;
      end
    end
  end

  int n_bad_exp;
  initial begin
    mp = 0; mk = 0; n_bad = 0; n_flush = 0; n_lat2 = 0; en = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (mp == N);
    repeat (3) @(posedge clk);
    n_bad_exp = 0;
    for (int i = 0; i < N; i++) if (g_bad[i]) n_bad_exp++;
    chk(n_bad == n_bad_exp, $sformatf("bad_phv %0d exp %0d", n_bad, n_bad_exp));
    chk(n_flush > 5, "flush beats exercised");
    chk(n_lat2 > 0, "first beat never two cycles after accept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    $display("FAIL: watchdog expired at packet %0d", mp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
