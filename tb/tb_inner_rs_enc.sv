// tb_inner_rs_enc: checks the RS(36,32) encoder against an independent LFSR
// division encoder on fixed and random chunks.
//
// Runs standalone with an independent LFSR reference (rs8_ref.svh); a watchdog
// ends a hung run. The encoder is combinational, so no latency is checked.
// Ends with a TB_RESULT line giving the number of checks and failures.
module tb_inner_rs_enc;
  import reach_pkg::*;
  `include "rs8_ref.svh"

  chunk_t data;
  ipar_t  parity;
  int checks = 0, failures = 0;

  inner_rs_enc dut (.data(data), .parity(parity));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input chunk_t d);
    data = d;
    #1;
    checks++;
    if (parity !== r8_encode(d)) begin
      failures++;
      $display("FAIL data=%h parity=%h exp=%h", d, parity, r8_encode(d));
    end
  endtask

  initial begin
    check_one('0);
    check_one({255'd0, 1'b1});
    check_one({8'hFF, 248'd0});
    for (int i = 0; i < 200; i++) check_one(rand256());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
