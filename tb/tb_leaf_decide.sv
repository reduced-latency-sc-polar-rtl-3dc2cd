// tb_leaf_decide: the last-stage decision for random LLR triples and all
// frozen combinations. Expected: u_odd = 0 if frozen else (f < 0);
// u_even = 0 if frozen else (selected candidate < 0), the candidate being g1
// when u_odd = 1 and g0 otherwise.
module tb_leaf_decide;
  int checks = 0, failures = 0;
  logic [7:0] f, g0, g1;
  logic       fo, fe, uo, ue;

  leaf_decide dut (.f, .g0, .g1, .frz_odd(fo), .frz_even(fe), .u_odd(uo), .u_even(ue));

  initial begin
    for (int k = 0; k < 2000; k++) begin
      bit eo, ee;
      f  = 8'($urandom);
      g0 = 8'($urandom);
      g1 = 8'($urandom);
      {fe, fo} = 2'(k);
      if (k % 13 == 0) f = 8'd0;
      #1;
      eo = fo ? 1'b0 : ($signed(f) < 0);
      ee = fe ? 1'b0 : (eo ? ($signed(g1) < 0) : ($signed(g0) < 0));
      checks += 2;
      if (uo !== eo) begin failures++; $display("FAIL u_odd f=%0d", $signed(f)); end
      if (ue !== ee) begin failures++; $display("FAIL u_even"); end
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
