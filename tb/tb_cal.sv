// tb_cal: checks the event delay calculation module.
//
// The expected table is written out literally from the module's
// specification, entries 0, 5, 10, ..., 50 (binary 000000, 000101, ...,
// 110010), so the test does not share the module's table arithmetic.
// Every thermometer code 0..10 is applied, then random codes (the selector
// counts ones, so it does not care about order).  Checks: the selector
// equals the number of ones; result follows the table while andout is
// high; result holds while andout is low even if tw changes; rst clears
// result.
module tb_cal;
  timeunit 1ps;
  timeprecision 100fs;

  localparam int unsigned N = 10;
  localparam logic [5:0] TABLE [0:10] = '{6'b000000, 6'b000101, 6'b001010, 6'b001111,
                                          6'b010100, 6'b011001, 6'b011110, 6'b100011,
                                          6'b101000, 6'b101101, 6'b110010};

  logic rst = 1'b1, andout = 1'b0;
  logic [N-1:0] tw = '0;
  logic [3:0] sel;
  logic [5:0] result;
  int checks = 0, failures = 0;

  cal dut (.rst(rst), .andout(andout), .tw(tw), .sel(sel), .result(result));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (tw=%b) at %0t", what, got, exp, tw, $realtime);
    end
  endtask

  task automatic measure(input logic [N-1:0] code);
    int k;
    logic [5:0] held;
    k = $countones(code);
    rst = 1'b1;
    #5ps;
    check(result, 0, "reset clears");
    rst = 1'b0;
    tw  = code;
    #5ps;
    check(sel, k, "selector");
    check(result, 0, "no update while andout low");
    andout = 1'b1;
    #5ps;
    check(result, TABLE[k], "table entry");
    andout = 1'b0;
    #5ps;
    held = result;
    tw   = N'($urandom);
    #5ps;
    check(result, held, "hold after andout falls");
  endtask

  initial begin
    #10ps;
    for (int k = 0; k <= N; k++) measure(N'((1 << k) - 1));
    for (int i = 0; i < 100; i++) measure(N'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
