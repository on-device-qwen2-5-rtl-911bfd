// tb_axil_ctrl -- self-checking testbench of the AXI4-Lite control slave.
//
// Acts as the host: writes and reads back every configuration register
// (including a byte-strobed write), checks the read-only result counters,
// issues start and checks that exactly one start pulse appears and that a
// start while busy is ignored, checks STATUS busy/done/error, and writes
// activations, checking the buffer write port's address and data. Address
// and data of a write are sent in both orders and with a delay between them.
module tb_axil_ctrl;
  import awq_pkg::*;

  localparam int ACT_DEPTH = 4864;

  logic clk = 0, rst_n = 0;
  logic [15:0] s_awaddr, s_araddr;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 1;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 1;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  logic start;
  logic [15:0] n_macros;
  logic [N_LANES-1:0][AXI_AW-1:0] base_addr;
  logic [N_LANES-1:0][15:0] n_blocks;
  logic act_we;
  logic [12:0] act_waddr;
  fp32_t act_wdata;
  logic busy = 0, error = 0;
  logic [N_LANES-1:0][15:0] results;
  int checks = 0, failures = 0;
  int n_start = 0;
  int n_act = 0;
  logic [12:0] last_act_addr;
  logic [31:0] last_act_data;

  always #5 clk = ~clk;

  axil_ctrl #(.ADDR_W(16), .ACT_DEPTH(ACT_DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (start) n_start++;
    if (act_we) begin n_act++; last_act_addr <= act_waddr; last_act_data <= act_wdata; end
  end

  task automatic axil_write(input logic [15:0] a, input logic [31:0] d, input logic [3:0] strb = 4'hf,
                            input int order = 0);
    @(negedge clk);
    if (order != 2) begin s_awaddr = a; s_awvalid = 1; end
    if (order != 1) begin s_wdata = d; s_wstrb = strb; s_wvalid = 1; end
    fork
      begin while (!s_awvalid || !s_awready) begin
        @(negedge clk);
        if (!s_awvalid) begin s_awaddr = a; s_awvalid = 1; end
      end @(posedge clk); @(negedge clk); s_awvalid = 0; end
      begin while (!s_wvalid || !s_wready) begin
        @(negedge clk);
        if (!s_wvalid) begin s_wdata = d; s_wstrb = strb; s_wvalid = 1; end
      end @(posedge clk); @(negedge clk); s_wvalid = 0; end
    join
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

  task automatic expect_reg(input logic [15:0] a, input logic [31:0] e);
    logic [31:0] d;
    axil_read(a, d);
    checks++;
    if (d !== e) begin
      failures++;
      $display("read %h: got %h expected %h", a, d, e);
    end
  endtask

  initial begin
    logic [31:0] d;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    for (int l = 0; l < N_LANES; l++) results[l] = 16'(100 + l);
    repeat (3) @(posedge clk);
    rst_n = 1;
    axil_write(16'h0008, 32'd14);
    expect_reg(16'h0008, 32'd14);
    for (int l = 0; l < N_LANES; l++) begin
      axil_write(16'(16 + 16 * l), 32'h1000_0000 * l + 32'h100, 4'hf, l % 3);
      axil_write(16'(20 + 16 * l), 32'(l + 1));
      axil_write(16'(24 + 16 * l), 32'(28 + l));
    end
    for (int l = 0; l < N_LANES; l++) begin
      expect_reg(16'(16 + 16 * l), 32'h1000_0000 * l + 32'h100);
      expect_reg(16'(20 + 16 * l), 32'(l + 1));
      expect_reg(16'(24 + 16 * l), 32'(28 + l));
      expect_reg(16'(28 + 16 * l), 32'(100 + l));
      checks++;
      if (base_addr[l] !== {8'(l + 1), 32'h1000_0000 * l + 32'h100} || n_blocks[l] !== 16'(28 + l)) begin
        failures++;
        $display("lane %0d outputs wrong: %h %0d", l, base_addr[l], n_blocks[l]);
      end
    end
    // byte strobe: change only byte 1 of N_MACROS
    axil_write(16'h0008, 32'h0000_ab00, 4'b0010);
    expect_reg(16'h0008, 32'h0000_ab0e);
    checks++;
    if (n_macros !== 16'hab0e) begin failures++; $display("n_macros output %h", n_macros); end
    axil_write(16'h0008, 32'd76);
    // start, busy, done, error
    expect_reg(16'h0004, 32'd0);
    axil_write(16'h0000, 32'd1);
    checks++;
    if (n_start != 1) begin failures++; $display("start pulses %0d", n_start); end
    busy = 1;
    axil_write(16'h0000, 32'd1);   // ignored while busy
    checks++;
    if (n_start != 1) begin failures++; $display("start accepted while busy"); end
    expect_reg(16'h0004, 32'd1);
    error = 1;
    @(negedge clk);
    error = 0;
    busy = 0;
    repeat (2) @(negedge clk);
    expect_reg(16'h0004, 32'd6);
    axil_write(16'h0000, 32'd1);
    expect_reg(16'h0004, 32'd0);
    // activations
    for (int k = 0; k < 8; k++) begin
      axil_write(16'h8000 + 16'(4 * (k * 600)), 32'hc0de_0000 + 32'(k), 4'hf, k % 3);
      checks++;
      if (last_act_addr !== 13'(k * 600) || last_act_data !== 32'hc0de_0000 + 32'(k)) begin
        failures++;
        $display("activation %0d: addr %0d data %h", k, last_act_addr, last_act_data);
      end
    end
    checks++;
    if (n_act != 8) begin failures++; $display("%0d activation writes", n_act); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
