// axil_ctrl -- AXI4-Lite control slave of the accelerator.
//
// The host configures a matrix-vector run through this port, loads the
// activation vector, starts the run and polls for its end. Register map
// (byte addresses, 32-bit registers):
//   0x0000 CTRL       write 1 to bit 0: start a run (ignored while busy)
//   0x0004 STATUS     bit 0 busy, bit 1 done (set when a run ends, cleared by
//                     start), bit 2 AXI read error seen in the run
//   0x0008 N_MACROS   macros per output block = K / GS
//   0x0010+16*l       lane l BASE_LO: byte address of its first macro, bits 31:0
//   0x0014+16*l       lane l BASE_HI: bits AXI_AW-1:32
//   0x0018+16*l       lane l N_BLOCKS: number of 8-channel output blocks
//   0x001C+16*l       lane l RESULTS: results produced so far (read only)
//   0x8000+4*k        activation x[k] (write only, FP32), sent to every lane
// Unmapped reads return 0; unmapped writes are ignored; every response is OKAY.
//
// Handshake: AW and W are accepted independently and the write happens once
// both have arrived; one write and one read are handled at a time. A read
// answers one cycle after its address is taken.
//
// From the paper: the PS controls the accelerator over an AXI master port of
// the PS (an AXI4-Lite slave here). The register map is this design's own.
module axil_ctrl
  import awq_pkg::*;
#(
  parameter int unsigned ADDR_W    = 16,
  parameter int unsigned ACT_DEPTH = ACT_DEPTH_DEFAULT,
  localparam int unsigned ACT_AW   = $clog2(ACT_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0]  s_awaddr,
  input  logic               s_awvalid,
  output logic               s_awready,
  input  logic [31:0]        s_wdata,
  input  logic [3:0]         s_wstrb,
  input  logic               s_wvalid,
  output logic               s_wready,
  output logic [1:0]         s_bresp,
  output logic               s_bvalid,
  input  logic               s_bready,
  input  logic [ADDR_W-1:0]  s_araddr,
  input  logic               s_arvalid,
  output logic               s_arready,
  output logic [31:0]        s_rdata,
  output logic [1:0]         s_rresp,
  output logic               s_rvalid,
  input  logic               s_rready,
  // configuration and control towards the lanes
  output logic               start,
  output logic [15:0]        n_macros,
  output logic [N_LANES-1:0][AXI_AW-1:0] base_addr,
  output logic [N_LANES-1:0][15:0]       n_blocks,
  output logic               act_we,
  output logic [ACT_AW-1:0]  act_waddr,
  output fp32_t              act_wdata,
  // status from the lanes
  input  logic               busy,
  input  logic               error,
  input  logic [N_LANES-1:0][15:0] results
);

  localparam logic [ADDR_W-1:0] ACT_BASE = ADDR_W'(16'h8000);

  logic [ADDR_W-1:0] awaddr_q;
  logic              aw_held, w_held;
  logic [31:0]       wdata_q;
  logic [3:0]        wstrb_q;
  logic              done_q, err_q, busy_d;
  logic              do_write;
  logic [31:0]       rdata_c;

  assign s_awready = !aw_held && !s_bvalid;
  assign s_wready  = !w_held  && !s_bvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign do_write  = aw_held && w_held && !s_bvalid;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] nw,
                                        input logic [3:0] strb);
    logic [31:0] m;
    for (int i = 0; i < 4; i++) m[8*i +: 8] = strb[i] ? nw[8*i +: 8] : old[8*i +: 8];
    return m;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_held   <= 1'b0;
      w_held    <= 1'b0;
      awaddr_q  <= '0;
      wdata_q   <= '0;
      wstrb_q   <= '0;
      s_bvalid  <= 1'b0;
      start     <= 1'b0;
      n_macros  <= '0;
      base_addr <= '0;
      n_blocks  <= '0;
      act_we    <= 1'b0;
      act_waddr <= '0;
      act_wdata <= '0;
      done_q    <= 1'b0;
      err_q     <= 1'b0;
      busy_d    <= 1'b0;
    end else begin
      start  <= 1'b0;
      act_we <= 1'b0;
      busy_d <= busy;
      if (busy_d && !busy) done_q <= 1'b1;
      if (error) err_q <= 1'b1;

      if (s_awvalid && s_awready) begin awaddr_q <= s_awaddr; aw_held <= 1'b1; end
      if (s_wvalid && s_wready) begin wdata_q <= s_wdata; wstrb_q <= s_wstrb; w_held <= 1'b1; end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;

      if (do_write) begin
        aw_held  <= 1'b0;
        w_held   <= 1'b0;
        s_bvalid <= 1'b1;
        if (awaddr_q >= ACT_BASE) begin
          act_we    <= 1'b1;
          act_waddr <= ACT_AW'((awaddr_q - ACT_BASE) >> 2);
          act_wdata <= wdata_q;
        end else if (awaddr_q == ADDR_W'(0)) begin
          if (wdata_q[0] && wstrb_q[0] && !busy) begin
            start  <= 1'b1;
            done_q <= 1'b0;
            err_q  <= 1'b0;
          end
        end else if (awaddr_q == ADDR_W'(8)) begin
          n_macros <= 16'(merge(32'(n_macros), wdata_q, wstrb_q));
        end else begin
          for (int l = 0; l < N_LANES; l++) begin
            if (awaddr_q == ADDR_W'(16 + 16*l))
              base_addr[l][31:0] <= merge(base_addr[l][31:0], wdata_q, wstrb_q);
            if (awaddr_q == ADDR_W'(20 + 16*l))
              base_addr[l][AXI_AW-1:32] <= (AXI_AW-32)'(merge(32'(base_addr[l][AXI_AW-1:32]), wdata_q, wstrb_q));
            if (awaddr_q == ADDR_W'(24 + 16*l))
              n_blocks[l] <= 16'(merge(32'(n_blocks[l]), wdata_q, wstrb_q));
          end
        end
      end
    end
  end

  always_comb begin
    rdata_c = '0;
    if (s_araddr == ADDR_W'(4)) rdata_c = {29'd0, err_q, done_q, busy};
    else if (s_araddr == ADDR_W'(8)) rdata_c = 32'(n_macros);
    for (int l = 0; l < N_LANES; l++) begin
      if (s_araddr == ADDR_W'(16 + 16*l)) rdata_c = base_addr[l][31:0];
      if (s_araddr == ADDR_W'(20 + 16*l)) rdata_c = 32'(base_addr[l][AXI_AW-1:32]);
      if (s_araddr == ADDR_W'(24 + 16*l)) rdata_c = 32'(n_blocks[l]);
      if (s_araddr == ADDR_W'(28 + 16*l)) rdata_c = 32'(results[l]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rdata_c;
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
