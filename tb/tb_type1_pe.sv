// tb_type1_pe: the Q-bit adder-subtractor, exhaustively for Q = 6 and with
// random operands for the default Q = 8: s = x+y and d = x-y (mod 2^Q),
// c_q = carry of x+y, b_q = (x < y).
module tb_type1_pe;
  int checks = 0, failures = 0;

  logic [7:0] x8, y8, s8, d8;
  logic       c8, b8;
  logic [5:0] x6, y6, s6, d6;
  logic       c6, b6;

  type1_pe          dut8 (.x(x8), .y(y8), .s(s8), .d(d8), .c_q(c8), .b_q(b8));
  type1_pe #(.Q(6)) dut6 (.x(x6), .y(y6), .s(s6), .d(d6), .c_q(c6), .b_q(b6));

  task automatic check8();
    int sum, dif;
    sum = int'(x8) + int'(y8);
    dif = int'(x8) - int'(y8);
    checks += 4;
    if (s8 !== 8'(sum))      begin failures++; $display("FAIL s %0d %0d", x8, y8); end
    if (d8 !== 8'(dif))      begin failures++; $display("FAIL d %0d %0d", x8, y8); end
    if (c8 !== (sum > 255))  begin failures++; $display("FAIL c %0d %0d", x8, y8); end
    if (b8 !== (x8 < y8))    begin failures++; $display("FAIL b %0d %0d", x8, y8); end
  endtask

  initial begin
    for (int a = 0; a < 64; a++) begin
      for (int b = 0; b < 64; b++) begin
        int sum, dif;
        x6 = 6'(a);
        y6 = 6'(b);
        #1;
        sum = a + b;
        dif = a - b;
        checks += 4;
        if (s6 !== 6'(sum))  failures++;
        if (d6 !== 6'(dif))  failures++;
        if (c6 !== (sum > 63)) failures++;
        if (b6 !== (a < b))  failures++;
      end
    end
    for (int i = 0; i < 3000; i++) begin
      x8 = 8'($urandom);
      y8 = (i % 7 == 0) ? x8 : 8'($urandom);
      #1;
      check8();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
