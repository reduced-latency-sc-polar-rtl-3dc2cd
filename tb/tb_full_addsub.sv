// tb_full_addsub: exhaustive test of the 1-bit full adder-subtractor:
// x+y+c_in must equal {c_out, s} and x-y-b_in must equal d with borrow b_out.
module tb_full_addsub;
  logic x, y, c_in, b_in, s, d, c_out, b_out;
  int checks = 0, failures = 0;

  full_addsub dut (.x, .y, .c_in, .b_in, .s, .d, .c_out, .b_out);

  initial begin
    for (int v = 0; v < 16; v++) begin
      int sum, dif;
      {b_in, c_in, y, x} = 4'(v);
      #1;
      sum = int'(x) + int'(y) + int'(c_in);
      dif = int'(x) - int'(y) - int'(b_in);
      checks += 4;
      if (s !== sum[0])        begin failures++; $display("FAIL s %0d", v); end
      if (c_out !== sum[1])    begin failures++; $display("FAIL c_out %0d", v); end
      if (d !== dif[0])        begin failures++; $display("FAIL d %0d", v); end
      if (b_out !== (dif < 0)) begin failures++; $display("FAIL b_out %0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
