// tb_half_addsub: exhaustive test of the 1-bit half adder-subtractor against
// integer arithmetic: x+y gives {c_out, sd}, x-y gives {b_out, sd} in two's
// complement.
module tb_half_addsub;
  logic x, y, sd, c_out, b_out;
  int checks = 0, failures = 0;

  half_addsub dut (.x, .y, .sd, .c_out, .b_out);

  initial begin
    for (int v = 0; v < 4; v++) begin
      int s, d;
      x = v[0];
      y = v[1];
      #1;
      s = int'(x) + int'(y);
      d = int'(x) - int'(y);
      checks += 3;
      if (sd !== s[0])            begin failures++; $display("FAIL sd %0d", v); end
      if (c_out !== s[1])         begin failures++; $display("FAIL c_out %0d", v); end
      if (b_out !== (d < 0))      begin failures++; $display("FAIL b_out %0d", v); end
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
