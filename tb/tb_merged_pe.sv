// tb_merged_pe: the merged PE for every pair of 6-bit inputs and for random
// 8-bit inputs (default Q). Expected values are plain integer arithmetic,
// reduced to Q bits two's complement:
//   out1 = (sign product) * min(|in1|, |in2|)   (Type II function)
//   out2 = in1 + in2,  out3 = in1 - in2         (Type I candidates)
// with the magnitude of -2^(Q-1) taken as 2^(Q-1).
module tb_merged_pe;
  int checks = 0, failures = 0;

  logic [7:0] a8, b8, o1_8, o2_8, o3_8;
  logic [5:0] a6, b6, o1_6, o2_6, o3_6;

  merged_pe          dut8 (.in1(a8), .in2(b8), .out1(o1_8), .out2(o2_8), .out3(o3_8));
  merged_pe #(.Q(6)) dut6 (.in1(a6), .in2(b6), .out1(o1_6), .out2(o2_6), .out3(o3_6));

  function automatic int ms(input int a, input int b);
    int ma, mb, m;
    ma = (a < 0) ? -a : a;
    mb = (b < 0) ? -b : b;
    m  = (ma < mb) ? ma : mb;
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  initial begin
    for (int i = -32; i < 32; i++) begin
      for (int j = -32; j < 32; j++) begin
        a6 = 6'(i);
        b6 = 6'(j);
        #1;
        checks += 3;
        if (o1_6 !== 6'(ms(i, j))) begin
          failures++; $display("FAIL out1 %0d %0d got %0d", i, j, $signed(o1_6));
        end
        if (o2_6 !== 6'(i + j)) begin
          failures++; $display("FAIL out2 %0d %0d got %0d", i, j, $signed(o2_6));
        end
        if (o3_6 !== 6'(i - j)) begin
          failures++; $display("FAIL out3 %0d %0d got %0d", i, j, $signed(o3_6));
        end
      end
    end
    for (int k = 0; k < 4000; k++) begin
      int i, j;
      a8 = 8'($urandom);
      b8 = (k % 11 == 0) ? -a8 : 8'($urandom);
      #1;
      i = int'($signed(a8));
      j = int'($signed(b8));
      checks += 3;
      if (o1_8 !== 8'(ms(i, j))) begin failures++; $display("FAIL8 out1 %0d %0d", i, j); end
      if (o2_8 !== 8'(i + j))    begin failures++; $display("FAIL8 out2 %0d %0d", i, j); end
      if (o3_8 !== 8'(i - j))    begin failures++; $display("FAIL8 out3 %0d %0d", i, j); end
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
