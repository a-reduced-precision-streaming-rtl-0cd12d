// tb_ppr_precision: runs the end-to-end test of tb_ppr_run at the reduced
// precisions the architecture was evaluated with besides the default Q1.25:
// Q1.23 (24 bits), Q1.21 (22 bits) and Q1.19 (20 bits). Each precision is a
// separate instance of the accelerator; all must match their bit-exact
// fixed-point models.
module tb_ppr_precision;
  bit fin [3];
  int chk [3], fl [3];

  tb_ppr_run #(.W(24), .FRAC(23)) u_q123 (.fin(fin[0]), .checks(chk[0]), .failures(fl[0]));
  tb_ppr_run #(.W(22), .FRAC(21)) u_q121 (.fin(fin[1]), .checks(chk[1]), .failures(fl[1]));
  tb_ppr_run #(.W(20), .FRAC(19)) u_q119 (.fin(fin[2]), .checks(chk[2]), .failures(fl[2]));

  initial begin
    int checks, failures;
    wait (fin[0] && fin[1] && fin[2]);
    checks = chk[0] + chk[1] + chk[2];
    failures = fl[0] + fl[1] + fl[2];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1] + chk[2], fl[0] + fl[1] + fl[2] + 1);
    $finish;
  end
endmodule
