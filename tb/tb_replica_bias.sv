// tb_replica_bias: self-checking test of the replica bias model.
// V_CTRLN must settle to 0.75 V - V_CTRLP (symmetrical biases) within 5 ps.
`timescale 1ps/1fs
module tb_replica_bias;
  real vctrlp = 0.0, vctrln;
  int checks = 0, failures = 0;

  replica_bias dut (.vctrlp(vctrlp), .vctrln(vctrln));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int k = 0; k <= 8; k++) begin
      vctrlp = 0.05 * k;
      #10;
      check((vctrln - (0.75 - vctrlp)) < 1e-9 && ((0.75 - vctrlp) - vctrln) < 1e-9,
            $sformatf("vctrlp=%f vctrln=%f", vctrlp, vctrln));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
