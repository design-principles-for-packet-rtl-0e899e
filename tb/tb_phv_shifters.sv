// tb_phv_shifters: checks whole header frames of the PHV shifters.
//
// Two instances (128-bit bus on the simplified T1 graph, 64-bit bus on the 32-path graph)
// are started on random PHVs and stepped beat by beat. Two enabled cycles after each beat is
// loaded, every lane's byte and keep must match the packet built here from the valid
// headers, and phv_last must be set on exactly the last header beat. PHV inputs are
// scrambled after start to check that the packet's PHV was captured.
module tb_phv_shifters;
  import deparser_pkg::*;

  localparam int HSZ [5]  = '{14, 20, 40, 20, 8};
  localparam int HOFF [5] = '{0, 14, 34, 74, 94};
  localparam logic [4:0] FIG6 [7] = '{5'b00001, 5'b00011, 5'b01011, 5'b10011,
                                       5'b00101, 5'b01101, 5'b10101};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic en, start, step;
  logic [PHV_BITS-1:0] phv_data;
  logic [N_HDRS-1:0]   phv_valid;
  logic [127:0] d0;  logic [15:0] k0;  logic l0;
  logic [63:0]  d1;  logic [7:0]  k1;  logic l1;
  int checks = 0, failures = 0;

  phv_shifters #(.CFG(CFG_T1_PARSER_DAG),   .W(16)) u0 (.clk, .rst_n, .en, .start, .step, .phv_data, .phv_valid, .hdr_data(d0), .hdr_keep(k0), .phv_last(l0));
  phv_shifters #(.CFG(CFG_T1_DEPARSER_DAG), .W(8))  u1 (.clk, .rst_n, .en, .start, .step, .phv_data, .phv_valid, .hdr_data(d1), .hdr_keep(k1), .phv_last(l1));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  byte unsigned pkt [$];
  int n_last;

  task automatic build(input logic [4:0] m, input logic [PHV_BITS-1:0] phv);
    pkt.delete();
    for (int h = 0; h < 5; h++)
      if (m[h]) for (int b = 0; b < HSZ[h]; b++) pkt.push_back(phv[8*(HOFF[h]+b) +: 8]);
  endtask

  task automatic expect_frame(input int w, input int k, input logic [127:0] d, input logic [15:0] kp,
                              input logic l);
    int n = pkt.size();
    for (int j = 0; j < w; j++) begin
      int pos = k * w + j;
      chk(kp[j] == (pos < n), $sformatf("W=%0d beat %0d lane %0d keep", w, k, j));
      if (pos < n) chk(d[8*j +: 8] == pkt[pos], $sformatf("W=%0d beat %0d lane %0d data", w, k, j));
    end
    chk(l == (n > 0 && k == (n + w - 1) / w - 1), $sformatf("W=%0d beat %0d last=%0d (len %0d)", w, k, l, n));
    if (l) n_last++;
  endtask

  initial begin
    en = 1'b1; start = 1'b0; step = 1'b0; phv_data = '0; phv_valid = '0; n_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      logic [4:0] m;
      logic [PHV_BITS-1:0] phv;
      bit use0;
      use0 = (t % 2 == 0);
      m = use0 ? FIG6[$urandom_range(0, 6)] : 5'($urandom_range(0, 31));
      for (int b = 0; b < PHV_BYTES; b++) phv[8*b +: 8] = 8'($urandom);
      build(m, phv);
      @(negedge clk);
      phv_data = phv; phv_valid = m; start = 1'b1; step = 1'b0;
      for (int k = 0; k <= 15; k++) begin
        @(negedge clk);
        start = 1'b0; step = 1'b1;
        phv_data = '1; phv_valid = 5'($urandom);
        if (k >= 2) begin
          if (use0) expect_frame(16, k - 2, d0, k0, l0);
          else      expect_frame(8, k - 2, {64'h0, d1}, {8'h0, k1}, l1);
        end
      end
    end
    chk(n_last > 150, $sformatf("only %0d last flags seen", n_last));
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
