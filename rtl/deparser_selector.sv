// deparser_selector: merges the header frame and the payload frame into Pkt_out.
//
// Per byte lane ("data select"): the byte comes from the PHV shifters when that lane holds
// a header byte (its header keep is set) and from the payload shifters otherwise; the lane
// is kept when either side has a byte there. Headers and payload never claim the same lane
// of the same beat, so an OR of the two keeps is the packet keep. The frame's last flag is
// the payload's last flag when the packet has a payload, and the headers' last flag when it
// has none (input has_payload).
//
// Timing: one register stage, loaded with en; out_valid follows in_valid.
module deparser_selector #(
  parameter int unsigned W = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic           in_valid,
  input  logic [W*8-1:0] hdr_data,
  input  logic [W-1:0]   hdr_keep,
  input  logic           phv_last,
  input  logic [W*8-1:0] pay_data,
  input  logic [W-1:0]   pay_keep,
  input  logic           pay_last,
  input  logic           has_payload,
  output logic           out_valid,
  output logic [W*8-1:0] out_data,
  output logic [W-1:0]   out_keep,
  output logic           out_last
);

  logic [W*8-1:0] d;
  always_comb begin
    for (int j = 0; j < W; j++) d[8*j +: 8] = hdr_keep[j] ? hdr_data[8*j +: 8] : pay_data[8*j +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_keep  <= '0;
      out_last  <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid;
      out_data  <= d;
      out_keep  <= hdr_keep | pay_keep;
      out_last  <= in_valid && (has_payload ? pay_last : phv_last);
    end
  end

endmodule
