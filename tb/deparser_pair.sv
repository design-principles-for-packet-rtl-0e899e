// deparser_pair: one deparser instance with its own stimulus/checker (deparser_env).
module deparser_pair #(
  parameter int CFG        = 0,
  parameter int DATA_WIDTH = 512,
  parameter int N_PKTS     = 100,
  parameter int MAX_PAY    = 200,
  parameter bit STALLS     = 1'b1,
  parameter int SEED       = 1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   done
);
  import deparser_pkg::*;
  localparam int W = DATA_WIDTH / 8;

  logic                  phv_tvalid, phv_tready, phv_has_payload, bad_phv;
  logic [PHV_BITS-1:0]   phv_data;
  logic [N_HDRS-1:0]     phv_valid;
  logic [DATA_WIDTH-1:0] s_tdata, m_tdata;
  logic [W-1:0]          s_tkeep, m_tkeep;
  logic                  s_tlast, s_tvalid, s_tready, m_tlast, m_tvalid, m_tready;

  deparser #(.CFG(cfg_e'(CFG)), .DATA_WIDTH(DATA_WIDTH)) u_dut (
    .clk, .rst_n, .phv_tvalid, .phv_tready, .phv_data, .phv_valid, .phv_has_payload,
    .s_axis_tdata(s_tdata), .s_axis_tkeep(s_tkeep), .s_axis_tlast(s_tlast),
    .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tkeep(m_tkeep), .m_axis_tlast(m_tlast),
    .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .bad_phv
  );

  deparser_env #(.CFG(CFG), .DATA_WIDTH(DATA_WIDTH), .N_PKTS(N_PKTS), .MAX_PAY(MAX_PAY),
                 .STALLS(STALLS), .SEED(SEED)) u_env (
    .clk, .rst_n, .phv_tvalid, .phv_tready, .phv_data, .phv_valid, .phv_has_payload,
    .s_tdata, .s_tkeep, .s_tlast, .s_tvalid, .s_tready,
    .m_tdata, .m_tkeep, .m_tlast, .m_tvalid, .m_tready, .bad_phv,
    .checks, .failures, .done
  );
endmodule
