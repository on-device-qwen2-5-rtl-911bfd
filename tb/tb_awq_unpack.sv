// tb_awq_unpack -- self-checking testbench of the unpacking unit.
//
// Sends AWQ macros (GS = 64: 1 scale beat, 1 zero beat, 16 qweight beats)
// with random data. Phase 1 inserts random gaps on the input and random
// back-pressure on the output; every row is compared with the nibbles,
// zeros and scales expected from the beats that were sent, including the
// last-row flag. Phase 2 streams 8 macros with no gaps and checks the rate:
// 64 rows per macro in 66 cycles.
module tb_awq_unpack;
  import awq_pkg::*;
  import tb_awq_pkg::*;

  localparam int GS = 64;
  localparam int BPM = 2 + GS / 4;

  logic clk = 0, rst_n = 0;
  logic [127:0] in_data;
  logic in_valid, in_ready;
  unpacked_row_t out_row;
  logic out_valid, out_ready;
  int checks = 0, failures = 0;
  bit gaps;
  unpacked_row_t exp_q [$];
  longint unsigned addr;
  int rows_seen;

  always #5 clk = ~clk;

  awq_unpack #(.GS(GS)) dut (.clk, .rst_n, .in_data, .in_valid, .in_ready,
                             .out_row, .out_valid, .out_ready);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected rows of the macro whose first beat is at addr
  task automatic expect_macro(input longint unsigned a);
    logic [127:0] sb, zb, qb;
    sb = gen_beat(a, BPM, 32'h77);
    zb = gen_beat(a + 16, BPM, 32'h77);
    for (int b = 0; b < GS / 4; b++) begin
      qb = gen_beat(a + 16 * (2 + b), BPM, 32'h77);
      for (int w = 0; w < 4; w++) begin
        unpacked_row_t e;
        for (int j = 0; j < 8; j++) begin
          e.qw[j]    = qb[32*w + 4*j +: 4];
          e.zero[j]  = zb[4*j +: 4];
          e.scale[j] = sb[16*j +: 16];
        end
        e.last = (b == GS / 4 - 1) && (w == 3);
        exp_q.push_back(e);
      end
    end
  endtask

  task automatic send_macros(input int n);
    for (int m = 0; m < n; m++) begin
      expect_macro(addr);
      for (int b = 0; b < BPM; b++) begin
        // drive at the falling edge, where in_ready is settled
        @(negedge clk);
        in_data  = gen_beat(addr, BPM, 32'h77);
        in_valid = 1'b1;
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        addr += 16;
        if (gaps) while ($urandom_range(0, 2) == 0) begin
          @(negedge clk);
          in_valid = 1'b0;
        end
      end
      if (m == n - 1) begin
        @(negedge clk);
        in_valid = 1'b0;
      end
    end
  endtask

  // output checker and back-pressure
  always @(posedge clk) begin
    if (rst_n) begin
      out_ready <= gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
      if (out_valid && out_ready) begin
        unpacked_row_t e;
        rows_seen++;
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("unexpected row");
        end else begin
          e = exp_q.pop_front();
          if (out_row !== e) begin
            failures++;
            if (failures < 4) $display("row %0d mismatch: got %h expected %h qbuf=%h widx=%0d word=%h", rows_seen, out_row.qw, e.qw, dut.qbuf, dut.widx, dut.word);
          end
        end
      end
    end
  end

  initial begin
    int t0, t1;
    in_valid = 0; in_data = '0; out_ready = 0; gaps = 1; addr = 0; rows_seen = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_macros(5);
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    // phase 2: full rate
    gaps = 0;
    @(posedge clk);
    t0 = rows_seen;
    fork
      send_macros(8);
      begin
        int c;
        c = 0;
        while (rows_seen < t0 + 8 * GS) begin @(posedge clk); c++; end
        t1 = c;
      end
    join
    checks++;
    // 8 macros: 8*66 cycles, plus the pipeline fill of one cycle
    if (t1 > 8 * (GS + 2) + 3) begin
      failures++;
      $display("rate: %0d rows took %0d cycles, expected at most %0d", 8 * GS, t1, 8 * (GS + 2) + 3);
    end
    $display("full-rate: %0d rows in %0d cycles", 8 * GS, t1);
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d rows missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
