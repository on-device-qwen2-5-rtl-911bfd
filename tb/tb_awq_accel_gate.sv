// tb_awq_accel_gate -- the Qwen2.5-0.5B FFN gate (or up) projection at the
// default parameters: y = W x with W of 4864 x 896 (14 macros per output
// block, 608 output blocks, 152 per lane), with random memory and result
// stalls. See tb_awq_accel_run.
module tb_awq_accel_gate;
  logic finished;
  int checks, failures;
  tb_awq_accel_run #(.K(896), .N(4864), .STALLS(1'b1)) run (.finished, .checks, .failures);
  initial begin
    #1 wait (finished === 1'b1);  // after the run has cleared it at time 0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
