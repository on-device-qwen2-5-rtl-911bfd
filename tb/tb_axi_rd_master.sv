// tb_axi_rd_master -- self-checking testbench of the AXI4 read master.
//
// Connects the master to the behavioural DRAM model, which withholds arready
// and read data at random, and applies random back-pressure on the output
// stream. For runs of several lengths (including lengths that are not a
// multiple of the burst length) it checks that exactly n_beats beats leave,
// in address order and with the memory's data, that done pulses once, that
// bursts obey the AXI rules checked by the model and that more than one but
// at most MAX_OUTSTANDING bursts were in flight.
module tb_axi_rd_master;
  import awq_pkg::*;
  import tb_awq_pkg::*;

  localparam int BPM = 18;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [AXI_AW-1:0] base_addr;
  logic [31:0] n_beats;
  logic busy, done, error;
  axi_ar_t ar;
  logic arready;
  axi_r_t r;
  logic rready;
  logic [127:0] out_data;
  logic out_valid, out_ready;
  int checks = 0, failures = 0;
  int got, n_done;
  longint unsigned exp_addr;

  always #5 clk = ~clk;

  axi_rd_master #(.BURST_LEN(16), .MAX_OUTSTANDING(4)) dut (
    .clk, .rst_n, .start, .base_addr, .n_beats, .busy, .done, .error,
    .ar, .arready, .r, .rready, .out_data, .out_valid, .out_ready);

  ddr_axi_model #(.BPM(BPM), .SEED(32'h5), .STALLS(1'b1)) mem (
    .clk, .rst_n, .ar, .arready, .r, .rready);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      out_ready <= ($urandom_range(0, 3) != 0);
      if (done) n_done++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== gen_beat(exp_addr, BPM, 32'h5)) begin
          failures++;
          if (failures < 10) $display("beat %0d at %h wrong", got, exp_addr);
        end
        got++;
        exp_addr += 16;
      end
    end
  end

  task automatic run(input longint unsigned base, input int n);
    got = 0; n_done = 0; exp_addr = base;
    @(negedge clk);
    base_addr = AXI_AW'(base);
    n_beats = 32'(n);
    start = 1;
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (got != n || n_done != 1) begin
      failures++;
      $display("run of %0d beats: %0d beats, %0d done pulses", n, got, n_done);
    end
  endtask

  initial begin
    base_addr = '0; n_beats = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 5 * BPM);
    run(40'h10_0000_0100, 14 * BPM);
    run(40'h0_0000_2000, 16);
    run(40'h0_0000_2000, 1);
    checks++;
    if (mem.violations != 0 || mem.max_inflight < 2 || mem.max_inflight > 4 || error) begin
      failures++;
      $display("violations=%0d max in flight=%0d error=%0d", mem.violations, mem.max_inflight, error);
    end
    $display("max bursts in flight %0d, data stalls %0d, AR stalls %0d", mem.max_inflight, mem.stall_cycles, mem.ar_stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
