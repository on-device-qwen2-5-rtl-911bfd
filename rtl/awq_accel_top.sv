// awq_accel_top -- AWQ INT4 matrix-vector accelerator with four MACRO_MAC lanes.
//
// The accelerator computes y = W x for a weight matrix W quantised with AWQ
// (INT4 weights, one FP16 scale and one INT4 zero per output channel and
// group of GS input channels) and an FP32 activation vector x. The host packs
// W into AWQ macros (8 output channels x GS input channels each) in DRAM and
// gives each of the four lanes a contiguous run of output blocks: lane l
// reads n_blocks[l] blocks, each of n_macros = K/GS macros, starting at
// base_addr[l]. The lanes are independent:
//
//   AXI4 read (128 bit) -> awq_unpack -> macro_mac -> result stream
//
// axil_ctrl is the host's control port (registers, start, status) and the
// write path into every lane's activation buffer. A run ends when every
// lane has delivered all of its results; STATUS.done then reads 1.
//
// Interface: AXI4-Lite control slave; per lane an AXI4 read master (AR and R
// channels only, as awq_pkg structs) and a result stream (awq_pkg::result_t:
// 8 FP32 sums and the block index within the lane's run, valid/ready).
// The read masters' busy and done outputs are left open (lint notes the
// empty pins): a lane counts as busy until its last result has been taken,
// which is later than its last read.
// Results leave through ports because the non-linear operations that consume
// them run on the host.
//
// From the paper: four MACRO_MAC units fed by four independent 128-bit AXI
// channels, each with an unpacking unit, GS = 64, FP32 arithmetic, results
// handed to the host. The split of work between the lanes (contiguous runs of
// output blocks), the register map and the result ports are this design's
// choices.
module awq_accel_top
  import awq_pkg::*;
#(
  parameter int unsigned GS        = GS_DEFAULT,
  parameter int unsigned ACT_DEPTH = ACT_DEPTH_DEFAULT,
  parameter int unsigned BURST_LEN = 16,
  localparam int unsigned ADDR_W   = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite control slave
  input  logic [ADDR_W-1:0]   s_awaddr,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [31:0]         s_wdata,
  input  logic [3:0]          s_wstrb,
  input  logic                s_wvalid,
  output logic                s_wready,
  output logic [1:0]          s_bresp,
  output logic                s_bvalid,
  input  logic                s_bready,
  input  logic [ADDR_W-1:0]   s_araddr,
  input  logic                s_arvalid,
  output logic                s_arready,
  output logic [31:0]         s_rdata,
  output logic [1:0]          s_rresp,
  output logic                s_rvalid,
  input  logic                s_rready,
  // four AXI4 read masters towards the PS high-performance ports
  output axi_ar_t [N_LANES-1:0] m_ar,
  input  logic    [N_LANES-1:0] m_arready,
  input  axi_r_t  [N_LANES-1:0] m_r,
  output logic    [N_LANES-1:0] m_rready,
  // four result streams towards the host
  output result_t [N_LANES-1:0] res,
  output logic    [N_LANES-1:0] res_valid,
  input  logic    [N_LANES-1:0] res_ready,
  // activity, for monitoring
  output logic    [N_LANES-1:0] busy_lane,
  output logic    [N_LANES-1:0] stall_array_full,
  output logic    [N_LANES-1:0] stall_result
);

  localparam int unsigned ACT_AW = $clog2(ACT_DEPTH);
  localparam int unsigned BEATS_PER_MACRO = 2 + GS / WORDS_PER_BEAT;

  logic                          start;
  logic [15:0]                   n_macros;
  logic [N_LANES-1:0][AXI_AW-1:0] base_addr;
  logic [N_LANES-1:0][15:0]      n_blocks;
  logic                          act_we;
  logic [ACT_AW-1:0]             act_waddr;
  fp32_t                         act_wdata;
  logic [N_LANES-1:0][15:0]      results;
  logic [N_LANES-1:0]            rd_error;

  axil_ctrl #(.ADDR_W(ADDR_W), .ACT_DEPTH(ACT_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .start, .n_macros, .base_addr, .n_blocks, .act_we, .act_waddr, .act_wdata,
    .busy (|busy_lane), .error (|rd_error), .results
  );

  for (genvar l = 0; l < N_LANES; l++) begin : g_lane
    logic [BEAT_W-1:0] beat;
    logic              beat_valid, beat_ready;
    unpacked_row_t     row;
    logic              row_valid, row_ready;
    logic [31:0]       n_beats;

    assign n_beats = 32'(n_blocks[l]) * 32'(n_macros) * 32'(BEATS_PER_MACRO);

    axi_rd_master #(.BURST_LEN(BURST_LEN)) u_rd (
      .clk, .rst_n, .start, .base_addr (base_addr[l]), .n_beats,
      .busy (), .done (), .error (rd_error[l]),
      .ar (m_ar[l]), .arready (m_arready[l]), .r (m_r[l]), .rready (m_rready[l]),
      .out_data (beat), .out_valid (beat_valid), .out_ready (beat_ready)
    );

    awq_unpack #(.GS(GS)) u_unpack (
      .clk, .rst_n,
      .in_data (beat), .in_valid (beat_valid), .in_ready (beat_ready),
      .out_row (row), .out_valid (row_valid), .out_ready (row_ready)
    );

    macro_mac #(.GS(GS), .ACT_DEPTH(ACT_DEPTH)) u_mac (
      .clk, .rst_n, .start, .n_macros,
      .act_we, .act_waddr, .act_wdata,
      .row, .row_valid, .row_ready,
      .res (res[l]), .res_valid (res_valid[l]), .res_ready (res_ready[l]),
      .stall_array_full (stall_array_full[l]), .stall_result (stall_result[l])
    );

    // a lane is busy from start until its last result has been taken
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        results[l]   <= '0;
        busy_lane[l] <= 1'b0;
      end else if (start) begin
        results[l]   <= '0;
        busy_lane[l] <= (n_blocks[l] != '0);
      end else if (res_valid[l] && res_ready[l]) begin
        results[l] <= results[l] + 16'd1;
        if (results[l] + 16'd1 == n_blocks[l]) busy_lane[l] <= 1'b0;
      end
    end
  end

endmodule
