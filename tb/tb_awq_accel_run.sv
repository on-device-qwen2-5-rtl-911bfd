// tb_awq_accel_run -- end-to-end test of the accelerator for one
// matrix-vector product y = W x with W of N x K, used by the testbenches
// that pick the sizes; they print the result line and end the simulation
// when `finished` rises.
//
// Plays the host: writes the K activations over the AXI4-Lite port, gives
// each of the four lanes N/32 output blocks of 8 channels (lane l's packed
// weights at byte address l * 2^28 in its own DRAM model), starts the run,
// collects the results from the four result streams and polls STATUS until
// done. Every result is compared bit for bit with the reference. With
// STALLS set, the DRAM models withhold AR and R and the result streams are
// held for long stretches, so that every flow-control path occurs; the test
// counts each mechanism (AXI address and data stalls, several bursts in
// flight, full PE array waiting for the adder tree, result stalls, all four
// lanes busy at once, start/done) and fails if one never happened. The
// cycle count of the run is printed next to the ideal of GS + 2 cycles per
// macro per lane, and without STALLS must stay within 10% of it.
module tb_awq_accel_run
  import awq_pkg::*;
  import tb_awq_pkg::*;
#(
  parameter int K      = 896,
  parameter int N      = 128,
  parameter bit STALLS = 1'b1
) (
  output logic finished,   // set when the run is over; the caller reports and ends
  output int   checks,
  output int   failures
);
  localparam int GS = 64;
  localparam int BPM = 2 + GS / 4;
  localparam int NMAC = K / GS;
  localparam int BLOCKS_PER_LANE = N / 8 / N_LANES;
  localparam logic [31:0] ASEED = 32'hace1;

  logic clk = 0, rst_n = 0;
  logic [15:0] s_awaddr, s_araddr;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 1;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 1;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  axi_ar_t [N_LANES-1:0] m_ar;
  logic    [N_LANES-1:0] m_arready;
  axi_r_t  [N_LANES-1:0] m_r;
  logic    [N_LANES-1:0] m_rready;
  result_t [N_LANES-1:0] res;
  logic    [N_LANES-1:0] res_valid, res_ready;
  logic    [N_LANES-1:0] busy_lane, stall_array_full, stall_result;

  int n_results [N_LANES];
  int n_stall_full = 0, n_stall_res = 0, n_all_busy = 0, n_hold = 0;
  int hold [N_LANES];
  longint run_cycles;

  always #5 clk = ~clk;

  awq_accel_top dut (.*);

  for (genvar l = 0; l < N_LANES; l++) begin : g_mem
    ddr_axi_model #(.BPM(BPM), .BASE(longint'(l) << 28), .SEED(32'h100 + l), .STALLS(STALLS)) mem (
      .clk, .rst_n, .ar (m_ar[l]), .arready (m_arready[l]), .r (m_r[l]), .rready (m_rready[l]));
  end

  initial begin
    // generous bound: activation load plus 4x the ideal run time
    repeat (20 * K + 4 * BLOCKS_PER_LANE * NMAC * (BPM + 48) + 100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finished = 1'b1;
  end

  // result streams: checked against the reference; with STALLS, held for
  // long stretches at random
  always @(posedge clk) begin
    if (rst_n) begin
      if (stall_array_full != '0) n_stall_full++;
      if (stall_result != '0) n_stall_res++;
      if (busy_lane == '1) n_all_busy++;
      for (int l = 0; l < N_LANES; l++) begin
        if (hold[l] > 0) hold[l] <= hold[l] - 1;
        else if (STALLS && $urandom_range(0, 63) == 0) begin hold[l] <= $urandom_range(50, 2 * NMAC * (GS + 2)); n_hold++; end
        res_ready[l] <= !STALLS || hold[l] <= 1;
        if (res_valid[l] && res_ready[l]) begin
          logic [7:0][31:0] e;
          e = ref_block(longint'(res[l].block) * NMAC * BPM * 16, NMAC, GS, 32'h100 + l, ASEED);
          checks++;
          if (res[l].block != 16'(n_results[l])) begin
            failures++;
            $display("lane %0d: result %0d carries block %0d", l, n_results[l], res[l].block);
          end
          for (int c = 0; c < 8; c++) begin
            checks++;
            if (res[l].sum[c] !== e[c]) begin
              failures++;
              if (failures < 10)
                $display("lane %0d block %0d ch %0d: got %h expected %h", l, res[l].block, c, res[l].sum[c], e[c]);
            end
          end
          n_results[l]++;
        end
      end
    end
  end

  task automatic axil_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wstrb = 4'hf; s_wvalid = 1;
    while (s_awvalid || s_wvalid) begin
      // sampled at the falling edge, where the ready signals are settled
      automatic logic aw_acc = s_awvalid && s_awready;
      automatic logic w_acc  = s_wvalid && s_wready;
      @(negedge clk);
      if (aw_acc) s_awvalid = 0;
      if (w_acc) s_wvalid = 0;
    end
    while (!s_bvalid) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic axil_read(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    while (!s_arready) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk);
  endtask

  initial begin
    logic [31:0] st;
    longint t0;
    checks = 0; failures = 0; finished = 1'b0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0; res_ready = '0;
    for (int l = 0; l < N_LANES; l++) begin n_results[l] = 0; hold[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) axil_write(16'h8000 + 16'(4 * k), gen_act(k, ASEED));
    $display("activations loaded at cycle %0d", $time / 10);
    axil_write(16'h0008, 32'(NMAC));
    // lane l: weights at byte address l * 2^28, BLOCKS_PER_LANE blocks
    for (int l = 0; l < N_LANES; l++) begin
      axil_write(16'(16 + 16 * l), 32'(l) << 28);
      axil_write(16'(20 + 16 * l), 32'h0);
      axil_write(16'(24 + 16 * l), 32'(BLOCKS_PER_LANE));
    end
    axil_write(16'h0000, 32'd1);
    t0 = $time;
    do axil_read(16'h0004, st); while (st[1] == 1'b0);
    run_cycles = ($time - t0) / 10;
    checks++;
    if (st[2]) begin failures++; $display("AXI read error reported"); end
    for (int l = 0; l < N_LANES; l++) begin
      logic [31:0] cnt;
      axil_read(16'(28 + 16 * l), cnt);
      checks++;
      if (n_results[l] != BLOCKS_PER_LANE || cnt != 32'(BLOCKS_PER_LANE)) begin
        failures++;
        $display("lane %0d: %0d results seen, counter %0d, expected %0d", l, n_results[l], cnt, BLOCKS_PER_LANE);
      end
    end
    $display("y = W x, W %0d x %0d, GS %0d: %0d results per lane in %0d cycles (ideal %0d)",
             N, K, GS, BLOCKS_PER_LANE, run_cycles, BLOCKS_PER_LANE * NMAC * (GS + 2));
    $display("mechanisms: AR stalls %0d, R stalls %0d, max bursts in flight %0d, array-full stalls %0d, result stalls %0d, result holds %0d, all-lanes-busy cycles %0d",
             g_mem[0].mem.ar_stall_cycles, g_mem[0].mem.stall_cycles, g_mem[0].mem.max_inflight,
             n_stall_full, n_stall_res, n_hold, n_all_busy);
    checks++;
    if (g_mem[0].mem.violations + g_mem[1].mem.violations + g_mem[2].mem.violations + g_mem[3].mem.violations != 0) begin
      failures++; $display("AXI rule violations");
    end
    checks++;
    if (n_all_busy == 0 || g_mem[0].mem.max_inflight < 2) begin
      failures++; $display("lanes never all busy, or no burst overlap");
    end
    if (STALLS) begin
      checks++;
      if (g_mem[0].mem.ar_stall_cycles == 0 || g_mem[0].mem.stall_cycles == 0 || n_stall_full == 0 ||
          n_stall_res == 0 || n_hold == 0) begin
        failures++; $display("a flow-control mechanism never occurred");
      end
    end else begin
      // without stalls: at most 10% above one row per cycle
      checks++;
      if (run_cycles > longint'(BLOCKS_PER_LANE * NMAC * (GS + 2)) * 11 / 10 + 200) begin
        failures++; $display("run too slow: %0d cycles", run_cycles);
      end
    end
    finished = 1'b1;
  end
endmodule
