// tb_fp32_adder_tree -- self-checking testbench of the 8-input FP32 adder tree.
//
// Drives random FP32 vectors (same and mixed signs, exponents spread over a
// wide range so that alignment, cancellation and rounding are all
// exercised) and compares the sum bit for bit with the pairwise order
// ((0+1)+(2+3))+((4+5)+(6+7)) evaluated with one single-precision rounding
// per addition. Also checks a few exact sums.
module tb_fp32_adder_tree;
  import awq_pkg::*;
  import tb_awq_pkg::*;

  fp32_t [7:0] in;
  fp32_t sum;
  int checks = 0, failures = 0;

  fp32_adder_tree #(.N(8)) dut (.in, .sum);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_vec(input int spread);
    logic [31:0] v [8];
    logic [31:0] e;
    for (int i = 0; i < 8; i++) begin
      v[i] = {$urandom_range(0, 1) == 1, 8'(127 - spread + $urandom_range(0, 2 * spread)), 23'($urandom)};
      in[i] = v[i];
    end
    #1;
    e = ref_tree(v);
    checks++;
    if (sum !== e) begin
      failures++;
      if (failures < 10) $display("mismatch spread=%0d: got %h expected %h", spread, sum, e);
    end
  endtask

  initial begin
    // 1+2+...+8 = 36
    for (int i = 0; i < 8; i++) in[i] = f32(real'(i + 1));
    #1 checks++;
    if (sum !== f32(36.0)) begin failures++; $display("1..8 sum wrong: %h", sum); end
    // x - x cancels exactly
    for (int i = 0; i < 8; i++) in[i] = (i % 2 == 0) ? 32'h3fa00000 : 32'hbfa00000;
    #1 checks++;
    if (sum !== 32'h0) begin failures++; $display("cancellation wrong: %h", sum); end
    for (int n = 0; n < 6000; n++) check_vec((n % 3 == 0) ? 2 : (n % 3 == 1) ? 12 : 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
