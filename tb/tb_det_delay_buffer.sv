// tb_det_delay_buffer: checks the delay of one LCELL buffer model.
//
// Drives rising and falling edges into the buffer at irregular times and
// samples the output 0.2 ps before and 0.2 ps after the expected arrival,
// which is two inverter delays plus one interconnect delay: 5.7 + 5.7 +
// 5.7 = 17.1 ps per the paper's delay table.
module tb_det_delay_buffer;
  timeunit 1ps;
  timeprecision 100fs;

  localparam realtime STAGE = 17.1ps;

  logic a = 1'b0;
  logic y;
  int checks = 0, failures = 0;

  det_delay_buffer dut (.a(a), .y(y));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $realtime);
    end
  endtask

  initial begin
    #100ps;
    check(y, 1'b0, "idle low");
    for (int i = 0; i < 8; i++) begin
      logic nv;
      nv = ~a;
      a  = nv;
      #(STAGE - 0.2ps);
      check(y, ~nv, "before arrival");
      #0.4ps;
      check(y, nv, "after arrival");
      #(20ps + i * 3ps);
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
