// tb_awq_accel_top -- end-to-end test of the accelerator at its default
// parameters on the Qwen2.5-0.5B key projection (896 inputs, 128 outputs),
// with random memory and result stalls. See tb_awq_accel_run.
module tb_awq_accel_top;
  logic finished;
  int checks, failures;
  tb_awq_accel_run #(.K(896), .N(128), .STALLS(1'b1)) run (.finished, .checks, .failures);
  initial begin
    #1 wait (finished === 1'b1);  // after the run has cleared it at time 0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
