// tb_awq_pe -- self-checking testbench of one processing element.
//
// Applies random INT4 qweights and zeros, FP16 scales across the normal range
// and FP32 activations, plus the corner cases q == z, q = 15 / z = 0 and
// q = 0 / z = 15, and compares p_sum bit for bit with (q - z) * (x * s)
// evaluated in single precision with one rounding per multiplication.
module tb_awq_pe;
  import awq_pkg::*;
  import tb_awq_pkg::*;

  int4_t qweight, zero;
  fp16_t scale;
  fp32_t activation, p_sum;
  int checks = 0, failures = 0;

  awq_pe dut (.qweight, .zero, .scale, .activation, .p_sum);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input int4_t q, input int4_t z, input fp16_t s, input fp32_t x);
    logic [31:0] exp_v;
    qweight = q; zero = z; scale = s; activation = x;
    #1;
    exp_v = ref_pe(q, z, s, x);
    checks++;
    if (p_sum !== exp_v) begin
      failures++;
      if (failures < 10)
        $display("mismatch q=%0d z=%0d s=%h x=%h: got %h expected %h", q, z, s, x, p_sum, exp_v);
    end
  endtask

  initial begin
    // exact small cases: (q-z)*x*s with s = 1.0 (3c00), x = 1.5
    apply(4'd9, 4'd8, 16'h3c00, 32'h3fc00000);
    if (p_sum !== 32'h3fc00000) begin failures++; $display("1 * 1.5 * 1.0 wrong: %h", p_sum); end
    apply(4'd0, 4'd15, 16'h4000, 32'h3f800000);          // -15 * 1 * 2 = -30
    if (p_sum !== 32'hc1f00000) begin failures++; $display("-15*2 wrong: %h", p_sum); end
    apply(4'd7, 4'd7, 16'h3c00, 32'h40490fdb);
    if (p_sum[30:0] !== 31'd0) begin failures++; $display("q==z not zero: %h", p_sum); end
    for (int i = 0; i < 5000; i++) begin
      logic [63:0] h;
      h = mix64(64'(i) + 64'h1234);
      apply(h[3:0], h[7:4], {h[8], 5'(1 + h[13:9] % 30), h[23:14]},
            {h[24], 8'(64 + h[39:32] % 128), h[62:40]});
    end
    apply(4'd15, 4'd0, 16'h7bff, 32'h7e000000);          // large: must overflow to infinity
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
