// tb_deparser_full: the deparser with every parameter at its default (512-bit bus, simplified
// T1 graph), driven end to end with random packets, gaps and backpressure by deparser_env.
module tb_deparser_full;
  import deparser_pkg::*;
  localparam int DW = 512;
  localparam int W  = DW / 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              phv_tvalid, phv_tready, phv_has_payload, bad_phv;
  logic [PHV_BITS-1:0] phv_data;
  logic [N_HDRS-1:0] phv_valid;
  logic [DW-1:0]     s_tdata, m_tdata;
  logic [W-1:0]      s_tkeep, m_tkeep;
  logic              s_tlast, s_tvalid, s_tready, m_tlast, m_tvalid, m_tready;
  int                checks, failures;
  bit                done;

  deparser u_dut (
    .clk, .rst_n, .phv_tvalid, .phv_tready, .phv_data, .phv_valid, .phv_has_payload,
    .s_axis_tdata(s_tdata), .s_axis_tkeep(s_tkeep), .s_axis_tlast(s_tlast),
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tkeep(m_tkeep), .m_axis_tlast(m_tlast),
    .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .bad_phv
  );

  deparser_env #(.CFG(0), .DATA_WIDTH(DW), .N_PKTS(300), .MAX_PAY(1500), .STALLS(1'b1), .SEED(7)) u_env (
    .clk, .rst_n, .phv_tvalid, .phv_tready, .phv_data, .phv_valid, .phv_has_payload,
    .s_tdata, .s_tkeep, .s_tlast, .s_tvalid, .s_tready,
    .m_tdata, .m_tkeep, .m_tlast, .m_tvalid, .m_tready, .bad_phv,
    .checks, .failures, .done
  );

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait (done);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
