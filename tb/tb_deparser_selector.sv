// tb_deparser_selector: random vectors through the selector of a 64-bit bus.
//
// Per lane the output byte must be the header byte where the header keep is set and the
// payload byte elsewhere, the keep the OR of both keeps, and the last flag the payload's
// when has_payload is set and the headers' otherwise. Results appear one enabled cycle
// later; with en low the outputs must hold.
module tb_deparser_selector;
  localparam int W = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic en, in_valid, phv_last, pay_last, has_payload;
  logic [W*8-1:0] hdr_data, pay_data, out_data;
  logic [W-1:0] hdr_keep, pay_keep, out_keep;
  logic out_valid, out_last;
  int checks = 0, failures = 0;

  deparser_selector #(.W(W)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [W*8-1:0] ed;
    logic [W-1:0]   ek;
    logic           el, ev;
    en = 1'b1; in_valid = 1'b0; phv_last = 1'b0; pay_last = 1'b0; has_payload = 1'b0;
    hdr_data = '0; pay_data = '0; hdr_keep = '0; pay_keep = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      int split;
      @(negedge clk);
      en = 1'b1;
      in_valid = ($urandom_range(0, 7) != 0);
      hdr_data = {$urandom, $urandom};
      pay_data = {$urandom, $urandom};
      // headers occupy the lanes below a split point, payload the rest (possibly none)
      split = $urandom_range(0, W);
      for (int j = 0; j < W; j++) begin
        hdr_keep[j] = (j < split);
        pay_keep[j] = (j >= split) && ($urandom_range(0, 3) != 0);
      end
      phv_last = $urandom_range(0, 1);
      pay_last = $urandom_range(0, 1);
      has_payload = $urandom_range(0, 1);
      for (int j = 0; j < W; j++) ed[8*j +: 8] = hdr_keep[j] ? hdr_data[8*j +: 8] : pay_data[8*j +: 8];
      ek = hdr_keep | pay_keep;
      el = in_valid && (has_payload ? pay_last : phv_last);
      ev = in_valid;
      @(negedge clk);
      chk(out_valid == ev, "valid");
      chk(out_data == ed, $sformatf("data %h exp %h", out_data, ed));
      chk(out_keep == ek, "keep");
      chk(out_last == el, "last");
      // hold
      if ($urandom_range(0, 3) == 0) begin
        en = 1'b0;
        hdr_data = ~hdr_data; pay_data = ~pay_data; in_valid = !in_valid;
        @(negedge clk);
        chk(out_data == ed && out_keep == ek && out_last == el && out_valid == ev, "changed with en low");
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
