// deparser_env: stimulus, reference model and checker for the deparser top level.
//
// Generates N_PKTS packets: a header set (a path of the selected graph, or now and then a
// valid vector that is on no path), random PHV bytes and a random payload length. The
// reference packet is built here independently of the design: the valid headers copied
// from the PHV in emit order (sizes 14/20/40/20/8 bytes), then the payload. The PHV and
// payload streams are driven with optional random gaps, the output with optional random
// backpressure. Each output packet is compared byte by byte, its beat count must be
// ceil(bytes/W), every beat but the last must be full, and the last beat's keep must be
// contiguous. Without stalls the first beat must come 6 cycles after the PHV is accepted
// when the pipeline is idle, and packets must leave back to back.
// Mechanisms counted: flush beats, beats mixing header and payload bytes, header-only
// packets, header-less packets, off-graph valid vectors, output stalls, payload gaps,
// back-to-back packet starts.
module deparser_env #(
  parameter int CFG        = 0,
  parameter int DATA_WIDTH = 512,
  parameter int N_PKTS     = 100,
  parameter int MAX_PAY    = 200,
  parameter bit STALLS     = 1'b1,
  parameter int SEED       = 1,
  localparam int W         = DATA_WIDTH / 8,
  localparam int PHVB      = 102
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic                  phv_tvalid,
  input  logic                  phv_tready,
  output logic [PHVB*8-1:0]     phv_data,
  output logic [4:0]            phv_valid,
  output logic                  phv_has_payload,
  output logic [DATA_WIDTH-1:0] s_tdata,
  output logic [W-1:0]          s_tkeep,
  output logic                  s_tlast,
  output logic                  s_tvalid,
  input  logic                  s_tready,
  input  logic [DATA_WIDTH-1:0] m_tdata,
  input  logic [W-1:0]          m_tkeep,
  input  logic                  m_tlast,
  input  logic                  m_tvalid,
  output logic                  m_tready,
  input  logic                  bad_phv,
  output int                    checks,
  output int                    failures,
  output bit                    done
);

  localparam int HSZ [5] = '{14, 20, 40, 20, 8};
  localparam int HOFF [5] = '{0, 14, 34, 74, 94};
  localparam logic [4:0] FIG6 [7] = '{5'b00001, 5'b00011, 5'b01011, 5'b10011,
                                       5'b00101, 5'b01101, 5'b10101};

  // ---------------- packet generation ----------------
  logic [PHVB*8-1:0] g_phv   [N_PKTS];
  logic [4:0]        g_valid [N_PKTS];
  int                g_hlen  [N_PKTS];
  int                g_plen  [N_PKTS];
  bit                g_bad   [N_PKTS];
  byte unsigned      exp_q   [$];
  int                exp_len [$];
  byte unsigned      pay_q   [$];
  int                n_bad_exp;

  function automatic bit on_graph(logic [4:0] m);
    if (CFG != 0) return 1'b1;
    for (int i = 0; i < 7; i++) if (FIG6[i] == m) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    void'($urandom(SEED));
    n_bad_exp = 0;
    for (int i = 0; i < N_PKTS; i++) begin
      logic [4:0] m;
      int r;
      r = $urandom_range(0, 99);
      if (CFG == 0) m = (r < 8) ? 5'($urandom_range(0, 31)) : FIG6[$urandom_range(0, 6)];
      else          m = 5'($urandom_range(0, 31));
      g_valid[i] = m;
      g_bad[i]   = !on_graph(m);
      for (int b = 0; b < PHVB; b++) g_phv[i][8*b +: 8] = 8'($urandom);
      g_hlen[i] = 0;
      if (!g_bad[i])
        for (int h = 0; h < 5; h++) if (m[h]) g_hlen[i] += HSZ[h];
      r = $urandom_range(0, 99);
      if (r < 15)      g_plen[i] = 0;
      else if (r < 30) g_plen[i] = $urandom_range(1, W);
      else             g_plen[i] = $urandom_range(1, MAX_PAY);
      if (g_hlen[i] == 0 && g_plen[i] == 0) g_plen[i] = $urandom_range(1, 3 * W);
      if (g_bad[i]) n_bad_exp++;
      // reference packet
      for (int h = 0; h < 5; h++)
        if (m[h] && !g_bad[i])
          for (int b = 0; b < HSZ[h]; b++) exp_q.push_back(g_phv[i][8*(HOFF[h]+b) +: 8]);
      for (int b = 0; b < g_plen[i]; b++) begin
        byte unsigned v = 8'($urandom);
        pay_q.push_back(v);
        exp_q.push_back(v);
      end
      exp_len.push_back(g_hlen[i] + g_plen[i]);
    end
  end

  // ---------------- PHV driver ----------------
  int phv_i;
  longint cyc;
  longint acc_cyc [$];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phv_i <= 0; phv_tvalid <= 1'b0; phv_data <= '0; phv_valid <= '0; phv_has_payload <= 1'b0;
    end else begin
      if (phv_tvalid && phv_tready) acc_cyc.push_back(cyc);
      if (!phv_tvalid || phv_tready) begin
        int n;
        n = (phv_tvalid && phv_tready) ? phv_i + 1 : phv_i;
        phv_i <= n;
        if (n < N_PKTS && (!STALLS || $urandom_range(0, 3) != 0)) begin
          phv_tvalid      <= 1'b1;
          phv_data        <= g_phv[n];
          phv_valid       <= g_valid[n];
          phv_has_payload <= (g_plen[n] != 0);
        end else begin
          phv_tvalid <= 1'b0;
        end
      end
    end
  end

  // ---------------- payload driver ----------------
  int pk, pb;          // packet index, byte offset within its payload
  int n_pay_gaps;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pk <= 0; pb <= 0; s_tvalid <= 1'b0; s_tdata <= '0; s_tkeep <= '0; s_tlast <= 1'b0;
      n_pay_gaps <= 0;
    end else if (!s_tvalid || s_tready) begin
      int k, b, base;
      k = pk; b = pb;
      if (s_tvalid && s_tready) begin
        b = b + W;
        if (b >= g_plen[k]) begin k = k + 1; b = 0; end
      end
      while (k < N_PKTS && g_plen[k] == 0) k++;
      pk <= k; pb <= b;
      if (k < N_PKTS && (!STALLS || $urandom_range(0, 4) != 0)) begin
        base = 0;
        for (int i = 0; i < k; i++) base += g_plen[i];
        s_tvalid <= 1'b1;
        for (int j = 0; j < W; j++) begin
          s_tdata[8*j +: 8] <= (b + j < g_plen[k]) ? pay_q[base + b + j] : 8'h00;
          s_tkeep[j]        <= (b + j < g_plen[k]);
        end
        s_tlast <= (b + W >= g_plen[k]);
      end else begin
        s_tvalid <= 1'b0;
        if (k < N_PKTS) n_pay_gaps <= n_pay_gaps + 1;
      end
    end
  end

  // ---------------- output monitor ----------------
  int n_out, cur_bytes, cur_beats, n_stalls, n_flush, n_mixed, n_hdr_only, n_no_hdr;
  int n_lat_ok, n_b2b, n_bad_seen, n_gap_in_pkt;
  longint last_end_cyc, prev_beat_cyc;
  bit in_pkt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_tready <= 1'b0; cyc <= 0;
    end else begin
      cyc      <= cyc + 1;
      m_tready <= !STALLS || ($urandom_range(0, 4) != 0);
    end
  end

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    n_out = 0; cur_bytes = 0; cur_beats = 0; n_stalls = 0; n_flush = 0; n_mixed = 0;
    n_hdr_only = 0; n_no_hdr = 0; n_lat_ok = 0; n_b2b = 0; n_bad_seen = 0; n_gap_in_pkt = 0;
    in_pkt = 1'b0; last_end_cyc = -10; prev_beat_cyc = 0;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [W=%0d CFG=%0d pkt %0d]: %s", W, CFG, n_out, what);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && bad_phv) n_bad_seen++;
    if (rst_n && m_tvalid && !m_tready) n_stalls++;
    if (rst_n && m_tvalid && m_tready && !done) begin
      int nb, hl, pl;
      bit contig;
      hl = g_hlen[n_out];
      pl = g_plen[n_out];
      if (!in_pkt) begin
        longint acc;
        acc = acc_cyc.size() > n_out ? acc_cyc[n_out] : -1;
        if (!STALLS) begin
          chk(cyc - acc >= 6, $sformatf("first beat after %0d cycles", cyc - acc));
          if (cyc - acc == 6) n_lat_ok++;
          else chk(cyc == last_end_cyc + 1, "packet neither at minimum latency nor back to back");
        end
        if (cyc == last_end_cyc + 1) n_b2b++;
        if (hl == 0) n_no_hdr++;
        if (pl == 0) n_hdr_only++;
      end else if (!STALLS) begin
        if (cyc != prev_beat_cyc + 1) n_gap_in_pkt++;
      end
      in_pkt = 1'b1;
      prev_beat_cyc = cyc;
      // bytes
      nb = 0; contig = 1'b1;
      for (int j = 0; j < W; j++) begin
        if (m_tkeep[j]) begin
          byte unsigned e;
          if (j != nb) contig = 1'b0;
          nb++;
          e = exp_q.size() > 0 ? exp_q.pop_front() : 8'hxx;
          chk(m_tdata[8*j +: 8] == e, $sformatf("byte %0d lane %0d: got %02x exp %02x",
                                                 cur_bytes + nb - 1, j, m_tdata[8*j +: 8], e));
        end
      end
      chk(contig, "keep not contiguous from lane 0");
      if (!m_tlast) chk(nb == W, "non-final beat not full");
      // mixed header/payload beat
      if (pl > 0 && cur_bytes < hl && cur_bytes + nb > hl) n_mixed++;
      // flush beat: last beat holds only bytes of the previous payload beat
      if (m_tlast && pl > 0 && (hl % W) != 0 && ((pl - 1) % W) + (hl % W) >= W) begin
        if (cur_beats > 0) n_flush++;
      end
      cur_bytes += nb;
      cur_beats++;
      if (m_tlast) begin
        int tot;
        tot = exp_len.size() > 0 ? exp_len.pop_front() : -1;
        chk(cur_bytes == tot, $sformatf("packet length %0d exp %0d", cur_bytes, tot));
        chk(cur_beats == (tot + W - 1) / W, $sformatf("beats %0d exp %0d", cur_beats, (tot + W - 1) / W));
        cur_bytes = 0; cur_beats = 0; in_pkt = 1'b0;
        last_end_cyc = cyc;
        n_out++;
        if (n_out == N_PKTS) begin
          chk(exp_q.size() == 0, "bytes left over");
          chk(n_bad_seen == n_bad_exp, $sformatf("bad_phv pulses %0d exp %0d", n_bad_seen, n_bad_exp));
          chk(n_flush > 0,   "no flush beat happened");
          chk(n_mixed > 0,   "no beat mixed header and payload");
          chk(n_hdr_only > 0, "no header-only packet");
          chk(n_b2b > 0,     "no back-to-back packets");
          if (STALLS) begin
            chk(n_stalls > 0,   "no output stall");
            chk(n_pay_gaps > 0, "no payload gap");
          end else begin
            chk(n_lat_ok > 0,      "minimum latency of 6 never seen");
            chk(n_gap_in_pkt == 0, "bubble inside a packet without stalls");
          end
          if (CFG == 0) chk(n_bad_exp == 0 || n_bad_seen > 0, "no off-graph PHV");
          else          chk(n_no_hdr > 0, "no header-less packet");
          $display("ENV W=%0d CFG=%0d stalls=%0d: pkts=%0d flush=%0d mixed=%0d hdr_only=%0d no_hdr=%0d bad=%0d b2b=%0d lat6=%0d out_stalls=%0d pay_gaps=%0d checks=%0d failures=%0d",
                   W, CFG, STALLS, n_out, n_flush, n_mixed, n_hdr_only, n_no_hdr, n_bad_seen, n_b2b,
                   n_lat_ok, n_stalls, n_pay_gaps, checks, failures);
          done = 1'b1;
        end
      end
    end
  end

endmodule
