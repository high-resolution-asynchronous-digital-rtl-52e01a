// tb_det_delay_chain: checks propagation and freezing of a 10-stage chain.
//
// 1. With the enable low, a start edge must reach tap s (s = 1..10) exactly
//    s stage delays (17.1 ps each) later: the tap is sampled just before
//    and just after.
// 2. After a reset, the enable is raised while the edge is inside the
//    chain: the taps already passed must stay 1, the rest 0, even after
//    start falls and for a long time after.
// 3. Reset clears every tap.
module tb_det_delay_chain;
  timeunit 1ps;
  timeprecision 100fs;

  localparam int unsigned STAGES = 10;
  localparam realtime     STAGE  = 17.1ps;

  logic rst = 1'b1, en_n = 1'b0, din = 1'b0;
  logic dout;
  logic [STAGES-1:0] taps;
  int checks = 0, failures = 0;

  det_delay_chain #(.STAGES(STAGES)) dut (
    .rst(rst), .en_n(en_n), .din(din), .dout(dout), .taps(taps));

  task automatic check(input logic [STAGES-1:0] got, input logic [STAGES-1:0] exp,
                       input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b at %0t", what, got, exp, $realtime);
    end
  endtask

  initial begin
    realtime t0;
    #50ps rst = 1'b0;
    #50ps;
    check(taps, '0, "after reset");
    // 1. propagation timing
    din = 1'b1;
    t0  = $realtime;
    for (int s = 1; s <= STAGES; s++) begin
      #(t0 + s * STAGE - 0.2ps - $realtime);
      check(taps, STAGES'((1 << (s - 1)) - 1), "tap before arrival");
      #0.4ps;
      check(taps, STAGES'((1 << s) - 1), "tap after arrival");
    end
    checks++;
    if (dout !== 1'b1) begin failures++; $display("FAIL dout not 1"); end
    // 3. reset clears
    din = 1'b0;
    #300ps rst = 1'b1;
    #20ps;
    check(taps, '0, "reset clears");
    rst = 1'b0;
    // 2. freeze in the middle of the chain
    for (int k = 1; k < STAGES; k++) begin
      #50ps din = 1'b1;
      #(k * STAGE + STAGE / 2);
      en_n = 1'b1;
      #10ps din = 1'b0;
      #400ps;
      check(taps, STAGES'((1 << k) - 1), "frozen after k stages");
      rst = 1'b1;
      #20ps;
      rst  = 1'b0;
      en_n = 1'b0;
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
