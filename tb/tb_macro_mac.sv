// tb_macro_mac -- self-checking testbench of the MACRO_MAC unit.
//
// Loads an activation vector into the unit's buffer, then feeds the rows of
// several output blocks (K = n_macros * 64 input channels each) as the
// unpacking unit would produce them. Every result (8 FP32 sums) is compared
// bit for bit with a reference that dequantises the same weights and sums
// them in the hardware's order (pairwise 8-row columns, then in sequence).
// Phase 1 uses random input gaps and result back-pressure, so the result
// stall and the full-array stall both occur; phase 2 streams two blocks
// with no gaps and checks that one row is taken per cycle.
module tb_macro_mac;
  import awq_pkg::*;
  import tb_awq_pkg::*;

  localparam int GS = 64;
  localparam int BPM = 2 + GS / 4;
  localparam int ACT_DEPTH = 256;
  localparam logic [31:0] WSEED = 32'h33, ASEED = 32'h99;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [15:0] n_macros;
  logic act_we = 0;
  logic [7:0] act_waddr;
  fp32_t act_wdata;
  unpacked_row_t row;
  logic row_valid = 0, row_ready;
  result_t res;
  logic res_valid, res_ready;
  logic stall_array_full, stall_result;
  int checks = 0, failures = 0;
  bit gaps;
  int results_seen = 0, n_stall_full = 0, n_stall_res = 0;
  int blk_base;   // block number of the first block of the current run

  always #5 clk = ~clk;

  macro_mac #(.GS(GS), .ACT_DEPTH(ACT_DEPTH)) dut (
    .clk, .rst_n, .start, .n_macros, .act_we, .act_waddr, .act_wdata,
    .row, .row_valid, .row_ready, .res, .res_valid, .res_ready,
    .stall_array_full, .stall_result);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic unpacked_row_t make_row(input int blk, input int k);
    longint unsigned maddr;
    logic [127:0] sb, zb, qb;
    unpacked_row_t r;
    int kk;
    maddr = longint'(blk * int'(n_macros) + k / GS) * BPM * 16;
    kk = k % GS;
    sb = gen_beat(maddr, BPM, WSEED);
    zb = gen_beat(maddr + 16, BPM, WSEED);
    qb = gen_beat(maddr + 16 * (2 + kk / 4), BPM, WSEED);
    for (int j = 0; j < 8; j++) begin
      r.qw[j]    = qb[32 * (kk % 4) + 4 * j +: 4];
      r.zero[j]  = zb[4*j +: 4];
      r.scale[j] = sb[16*j +: 16];
    end
    r.last = (kk == GS - 1);
    return r;
  endfunction

  task automatic send_blocks(input int first, input int n);
    for (int b = first; b < first + n; b++)
      for (int k = 0; k < int'(n_macros) * GS; k++) begin
        @(negedge clk);
        row = make_row(b, k);
        row_valid = 1'b1;
        while (!row_ready) @(negedge clk);
        @(posedge clk);
        if (gaps && $urandom_range(0, 5) == 0) begin
          @(negedge clk);
          row_valid = 1'b0;
          repeat ($urandom_range(0, 3)) @(negedge clk);
        end
      end
    @(negedge clk);
    row_valid = 1'b0;
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      res_ready <= gaps ? ($urandom_range(0, 299) == 0) : 1'b1;
      if (stall_array_full) n_stall_full++;
      if (stall_result) n_stall_res++;
      if (res_valid && res_ready) begin
        int blk;
        logic [7:0][31:0] exp_blk;
        blk = blk_base + int'(res.block);
        checks++;
        if (res.block != 16'(results_seen)) begin
          failures++;
          $display("result %0d carries block %0d", results_seen, res.block);
        end
        exp_blk = ref_block(longint'(blk) * n_macros * BPM * 16, n_macros, GS, WSEED, ASEED);
        for (int c = 0; c < 8; c++) begin
          logic [31:0] e;
          e = exp_blk[c];
          checks++;
          if (res.sum[c] !== e) begin
            failures++;
            if (failures < 10) $display("block %0d ch %0d: got %h expected %h", blk, c, res.sum[c], e);
          end
        end
        results_seen++;
      end
    end
  end

  initial begin
    int t0, cyc;
    gaps = 1; n_macros = 2; row = '0; act_waddr = '0; act_wdata = '0; res_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < ACT_DEPTH; k++) begin
      @(negedge clk);
      act_we = 1; act_waddr = 8'(k); act_wdata = gen_act(k, ASEED);
    end
    @(negedge clk);
    act_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    blk_base = 0;
    send_blocks(0, 3);
    wait (results_seen == 3);
    checks++;
    if (n_stall_full == 0 || n_stall_res == 0) begin
      failures++;
      $display("stalls not exercised: full=%0d result=%0d", n_stall_full, n_stall_res);
    end
    // phase 2: new run at full rate
    repeat (3) @(negedge clk);
    gaps = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    blk_base = 3;
    results_seen = 0;
    t0 = $time;
    send_blocks(3, 2);
    cyc = int'(($time - t0) / 10);
    checks++;
    if (cyc > 2 * 2 * GS + 2) begin
      failures++;
      $display("rate: %0d rows took %0d cycles", 2 * 2 * GS, cyc);
    end
    $display("full-rate: %0d rows in %0d cycles; stalls full=%0d result=%0d", 2 * 2 * GS, cyc, n_stall_full, n_stall_res);
    wait (results_seen == 2);
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
