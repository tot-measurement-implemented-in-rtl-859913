// carry4_tb: checks the CARRY4 behavioural model. With all selects at 1 a
// rising edge on CYINIT must reach CO0..CO3 after 30, 46, 62 and 78 ps and
// the XOR outputs O0..O3 must fall 10 ps after the carry into their bit
// (10, 40, 56, 72 ps); a falling edge must make them rise again with the
// same delays. With selects at 0 the carry outputs must follow DI and the
// XOR outputs must equal the carries into their bits. Expected times are written out by hand.
`timescale 1ps/1ps
module carry4_tb;
  int checks = 0, failures = 0;

  logic       ci = 1'b0, cyinit = 1'b0;
  logic [3:0] di = 4'b0000, s = 4'b1111;
  wire  [3:0] co, o;

  carry4 dut (.CI(ci), .CYINIT(cyinit), .DI(di), .S(s), .CO(co), .O(o));

  task automatic check(input string what, input logic [3:0] got, input logic [3:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: got %b expected %b", what, $time, got, exp);
    end
  endtask

  initial begin
    #1000;
    check("idle CO", co, 4'b0000);
    check("idle O",  o,  4'b1111);
    // rising edge at t = 1000
    cyinit = 1'b1;
    #9  check("O @9",   o,  4'b1111);
    #2  check("O @11",  o,  4'b1110);
    #18 check("CO @29", co, 4'b0000);  check("O @29", o, 4'b1110);
    #2  check("CO @31", co, 4'b0001);  check("O @31", o, 4'b1110);
    #10 check("O @41",  o,  4'b1100);
    #4  check("CO @45", co, 4'b0001);
    #2  check("CO @47", co, 4'b0011);
    #10 check("O @57",  o,  4'b1000);
    #6  check("CO @63", co, 4'b0111);
    #10 check("O @73",  o,  4'b0000);
    #6  check("CO @79", co, 4'b1111);
    #10 check("O @89",  o,  4'b0000);
    // falling edge at t = 2000
    #911 cyinit = 1'b0;
    #31 check("CO fall @31", co, 4'b1110); check("O fall @31", o, 4'b0001);
    #10 check("O fall @41",  o,  4'b0011);
    #50 check("CO fall @91", co, 4'b0000); check("O fall @91", o, 4'b1111);
    // CI also enters the first stage
    ci = 1'b1;
    #100 check("CI CO", co, 4'b1111);
    ci = 1'b0;
    // selects at 0: carry outputs follow DI, XOR outputs follow the carry
    #200 s = 4'b0000; di = 4'b1010;
    #100 check("DI CO", co, 4'b1010);
    check("DI O", o, 4'b0100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
