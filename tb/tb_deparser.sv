// tb_deparser: end-to-end test of the deparser at several bus widths and both T1 graphs.
//
// Five deparser instances run side by side, each with random packets, random PHV and
// payload gaps and output backpressure (or none, to check the 6-cycle latency and one beat
// per cycle): the simplified graph at 512, 128 and 64 bits, the non-optimized 32-path
// graph at 256 and 64 bits. See deparser_env for what is checked and counted.
module tb_deparser;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int N = 5;
  int chk [N], fl [N];
  bit dn [N];

  deparser_pair #(.CFG(0), .DATA_WIDTH(512), .N_PKTS(150), .MAX_PAY(400), .STALLS(1), .SEED(11)) p0 (.clk, .rst_n, .checks(chk[0]), .failures(fl[0]), .done(dn[0]));
  deparser_pair #(.CFG(0), .DATA_WIDTH(512), .N_PKTS(150), .MAX_PAY(400), .STALLS(0), .SEED(12)) p1 (.clk, .rst_n, .checks(chk[1]), .failures(fl[1]), .done(dn[1]));
  deparser_pair #(.CFG(0), .DATA_WIDTH(128), .N_PKTS(150), .MAX_PAY(200), .STALLS(1), .SEED(13)) p2 (.clk, .rst_n, .checks(chk[2]), .failures(fl[2]), .done(dn[2]));
  deparser_pair #(.CFG(1), .DATA_WIDTH(256), .N_PKTS(150), .MAX_PAY(300), .STALLS(0), .SEED(14)) p3 (.clk, .rst_n, .checks(chk[3]), .failures(fl[3]), .done(dn[3]));
  deparser_pair #(.CFG(1), .DATA_WIDTH(64),  .N_PKTS(150), .MAX_PAY(100), .STALLS(1), .SEED(15)) p4 (.clk, .rst_n, .checks(chk[4]), .failures(fl[4]), .done(dn[4]));

  int checks, failures;

  task automatic finish_run(input bit timeout);
    checks = 0; failures = timeout ? 1 : 0;
    for (int i = 0; i < N; i++) begin
      checks += chk[i];
      failures += fl[i];
      if (!dn[i]) begin
        failures++;
        $display("FAIL: instance %0d did not finish", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait (dn[0] && dn[1] && dn[2] && dn[3] && dn[4]);
    repeat (2) @(posedge clk);
    finish_run(1'b0);
  end

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    $display("FAIL: watchdog expired");
    finish_run(1'b1);
  end
endmodule
