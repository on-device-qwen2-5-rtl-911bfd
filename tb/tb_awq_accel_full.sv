// tb_awq_accel_full -- one complete operation at the default parameters:
// the Qwen2.5-0.5B FFN down projection, y = W x with W of 896 x 4864
// (76 macros per output block, 112 output blocks, 28 per lane), which also
// fills the activation buffers to their full depth. Memory and result
// streams never stall, so the run time is checked against one row per
// cycle per lane. See tb_awq_accel_run.
module tb_awq_accel_full;
  logic finished;
  int checks, failures;
  tb_awq_accel_run #(.K(4864), .N(896), .STALLS(1'b0)) run (.finished, .checks, .failures);
  initial begin
    #1 wait (finished === 1'b1);  // after the run has cleared it at time 0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
