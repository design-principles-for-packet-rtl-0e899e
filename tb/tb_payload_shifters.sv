// tb_payload_shifters: checks payload realignment behind headers of every possible length.
//
// Two instances (128-bit bus on the simplified T1 graph, 64-bit bus on the 32-path graph)
// receive, for random header lengths of their graph and random payload lengths, the beat
// sequence a sequencer would issue: floor(L/W) header-only beats, one beat per payload beat
// and, when the shifted payload spills over, one flush beat. On beats that consume no
// payload the payload bus carries random bytes and keep bits, which must not show. Bubbles
// and en-low cycles are mixed in. Three enabled cycles after each beat, every lane's byte and keep must equal the
// payload placed at packet offset L (computed here), and pay_last must mark the last beat.
module tb_payload_shifters;
  import deparser_pkg::*;

  localparam int HSZ [5] = '{14, 20, 40, 20, 8};
  localparam logic [4:0] FIG6 [7] = '{5'b00001, 5'b00011, 5'b01011, 5'b10011,
                                       5'b00101, 5'b01101, 5'b10101};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Expected beat, shifted along with the enabled cycles.
  typedef struct {
    bit          v;
    bit          last;
    logic [127:0] d;
    logic [15:0]  k;
  } exp_t;

  // One test instance per bus width.
  logic en;
  logic [1:0] tv, tf, tl, pn;
  logic [2:0] ci0;  logic [1:0] ci1;
  logic [15:0] ds0; logic [7:0] ds1;
  logic [127:0] sd0; logic [63:0] sd1;
  logic [15:0] sk0;  logic [7:0] sk1;
  logic [127:0] pd0; logic [63:0] pd1;
  logic [15:0] pk0;  logic [7:0] pk1;
  logic pl0, pl1;

  payload_shifters #(.CFG(CFG_T1_PARSER_DAG), .W(16)) u0 (.clk, .rst_n, .en, .tok_valid(tv[0]), .tok_first(tf[0]), .tok_last(tl[0]), .pay_new(pn[0]), .ctrl_idx(ci0), .dly_sel(ds0), .s_tdata(sd0), .s_tkeep(sk0), .pay_data(pd0), .pay_keep(pk0), .pay_last(pl0));
  payload_shifters #(.CFG(CFG_T1_DEPARSER_DAG), .W(8)) u1 (.clk, .rst_n, .en, .tok_valid(tv[1]), .tok_first(tf[1]), .tok_last(tl[1]), .pay_new(pn[1]), .ctrl_idx(ci1), .dly_sel(ds1), .s_tdata(sd1), .s_tkeep(sk1), .pay_data(pd1), .pay_keep(pk1), .pay_last(pl1));

  exp_t pipe [2][3];
  exp_t nx [2];
  int n_flush = 0, n_dly = 0;

  // expectations follow the datapath: shifted on every enabled edge
  always @(posedge clk) begin
    if (rst_n && en) begin
      for (int i = 0; i < 2; i++) begin
        pipe[i][2] <= pipe[i][1];
        pipe[i][1] <= pipe[i][0];
        pipe[i][0] <= nx[i];
      end
    end
  end

  // outputs are compared half a cycle after each edge
  always @(negedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < 2; i++) begin
        exp_t e;
        int w;
        logic [127:0] d;
        logic [15:0]  k;
        logic         l;
        e = pipe[i][2];
        w = (i == 0) ? 16 : 8;
        d = (i == 0) ? pd0 : {64'h0, pd1};
        k = (i == 0) ? pk0 : {8'h0, pk1};
        l = (i == 0) ? pl0 : pl1;
        if (e.v) begin
          for (int j = 0; j < w; j++) begin
            chk(k[j] == e.k[j], $sformatf("inst %0d lane %0d keep %0d exp %0d", i, j, k[j], e.k[j]));
            if (e.k[j]) chk(d[8*j +: 8] == e.d[8*j +: 8], $sformatf("inst %0d lane %0d data", i, j));
          end
          chk(l == e.last, $sformatf("inst %0d last %0d exp %0d", i, l, e.last));
        end
      end
    end
  end

  // drive one packet on instance i
  task automatic run_pkt(input int i);
    int w = (i == 0) ? 16 : 8;
    logic [4:0] m;
    int len = 0, plen, off, q, nbeats, npb;
    byte unsigned pay [$];
    m = (i == 0) ? FIG6[$urandom_range(0, 6)] : 5'($urandom_range(0, 31));
    for (int h = 0; h < 5; h++) if (m[h]) len += HSZ[h];
    plen = $urandom_range(1, 5 * w);
    for (int b = 0; b < plen; b++) pay.push_back(8'($urandom));
    off = len % w; q = len / w;
    npb = (plen + w - 1) / w;
    nbeats = (len + plen + w - 1) / w;
    if (off != 0 && ((plen - 1) % w) + off >= w) n_flush++;
    if (off != 0) n_dly++;
    for (int k = 0; k < nbeats; k++) begin
      exp_t e;
      int pb = k - q;
      // random bubble / stall
      while ($urandom_range(0, 3) == 0) begin
        @(negedge clk);
        en = ($urandom_range(0, 2) != 0);
        tv = '0;
        nx[i].v = 1'b0;
        @(posedge clk);
      end
      @(negedge clk);
      en = 1'b1;
      tv[i] = 1'b1; tf[i] = (k == 0); tl[i] = (k == nbeats - 1); pn[i] = (k >= q) && (pb < npb);
      if (i == 0) begin
        ci0 = 3'(offset_index(CFG_T1_PARSER_DAG, 16, off));
        for (int j = 0; j < 16; j++) begin
          ds0[j] = (j < off);
          sd0[8*j +: 8] = (pb >= 0 && pb * w + j < plen) ? pay[pb * w + j] : 8'($urandom);
          sk0[j] = pn[i] ? (pb * w + j < plen) : 1'($urandom);
        end
      end else begin
        ci1 = 2'(offset_index(CFG_T1_DEPARSER_DAG, 8, off));
        for (int j = 0; j < 8; j++) begin
          ds1[j] = (j < off);
          sd1[8*j +: 8] = (pb >= 0 && pb * w + j < plen) ? pay[pb * w + j] : 8'($urandom);
          sk1[j] = pn[i] ? (pb * w + j < plen) : 1'($urandom);
        end
      end
      // expected output beat k (headers are not part of this block: those lanes have keep 0)
      e.v = 1'b1; e.last = (k == nbeats - 1); e.d = '0; e.k = '0;
      for (int j = 0; j < w; j++) begin
        int pos = k * w + j - len;
        if (pos >= 0 && pos < plen) begin
          e.k[j] = 1'b1;
          e.d[8*j +: 8] = pay[pos];
        end
      end
      nx[i] = e;
      @(posedge clk);
    end
    @(negedge clk);
    tv = '0;
    nx[i].v = 1'b0;
  endtask

  initial begin
    en = 1'b1; tv = '0; tf = '0; tl = '0; pn = '0; ci0 = '0; ci1 = '0; ds0 = '0; ds1 = '0;
    sd0 = '0; sd1 = '0; sk0 = '0; sk1 = '0;
    for (int i = 0; i < 2; i++) begin
      nx[i] = '{default: '0};
      for (int s = 0; s < 3; s++) pipe[i][s] = '{default: '0};
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) run_pkt(t % 2);
    repeat (4) @(posedge clk);
    chk(n_flush > 10, "too few flush beats exercised");
    chk(n_dly > 10, "too few packets with delayed lanes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
