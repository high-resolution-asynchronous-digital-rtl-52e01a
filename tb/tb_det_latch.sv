// tb_det_latch: checks the chain latch against a reference model.
//
// Applies random rst / en_n / d sequences and compares q with a reference
// that is transparent while en_n is low, holds while en_n is high and is 0
// while rst is high.
module tb_det_latch;
  timeunit 1ps;
  timeprecision 100fs;

  logic rst = 1'b1, en_n = 1'b0, d = 1'b0;
  logic q;
  logic ref_q = 1'b0;
  int checks = 0, failures = 0;
  int holds = 0, passes = 0;

  det_latch dut (.rst(rst), .en_n(en_n), .d(d), .q(q));

  initial begin
    #10ps;
    for (int i = 0; i < 400; i++) begin
      logic [3:0] r;
      r    = 4'($urandom);
      rst  = (r[3:1] == 3'b000);
      en_n = r[2];
      d    = r[0] ^ r[1];
      #5ps;
      if (rst)        ref_q = 1'b0;
      else if (!en_n) begin ref_q = d; passes++; end
      else            holds++;
      checks++;
      if (q !== ref_q) begin
        failures++;
        $display("FAIL step %0d rst=%0b en_n=%0b d=%0b q=%0b exp=%0b", i, rst, en_n, d, q, ref_q);
      end
    end
    checks++;
    if (holds == 0 || passes == 0) begin
      failures++;
      $display("FAIL coverage holds=%0d passes=%0d", holds, passes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100ns;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
