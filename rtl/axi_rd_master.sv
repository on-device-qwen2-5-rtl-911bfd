// axi_rd_master -- AXI4 read master that streams one lane's AWQ macros from
// DRAM into its unpacking unit.
//
// A run reads n_beats consecutive 128-bit beats starting at base_addr. The
// master splits the run into INCR bursts of up to BURST_LEN beats (the last
// one shorter) and keeps up to MAX_OUTSTANDING bursts in flight. Read data is
// not buffered: R passes straight to the output stream and rready is the
// consumer's ready, so back-pressure from the unpacking unit reaches the
// memory system. A response other than OKAY sets the sticky error flag; the
// data is forwarded anyway.
//
// Interface: start (one cycle) with base_addr and n_beats; AR and R channels
// as awq_pkg::axi_ar_t / axi_r_t plus arready / rready; output stream
// out_data/out_valid/out_ready; busy from start until the last beat has left;
// done pulses for one cycle at that point.
//
// Timing: one AR per cycle at most; the first beat leaves in the cycle the
// memory returns it. base_addr must be aligned to BURST_LEN*16 bytes so that
// no burst crosses a 4 KB boundary.
//
// From the paper: four independent 128-bit AXI channels, one per MACRO_MAC,
// reading through the PS's high-performance ports. Burst length, number of
// outstanding bursts, address width and error handling are this design's
// choices.
module axi_rd_master
  import awq_pkg::*;
#(
  parameter int unsigned BURST_LEN       = 16,
  parameter int unsigned MAX_OUTSTANDING = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [AXI_AW-1:0] base_addr,
  input  logic [31:0]       n_beats,
  output logic              busy,
  output logic              done,
  output logic              error,
  // AXI4 read address and data channels
  output axi_ar_t           ar,
  input  logic              arready,
  input  axi_r_t            r,
  output logic              rready,
  // beat stream to the unpacking unit
  output logic [BEAT_W-1:0] out_data,
  output logic              out_valid,
  input  logic              out_ready
);

  localparam int unsigned BYTES_PER_BEAT = BEAT_W / 8;
  localparam int unsigned OW = $clog2(MAX_OUTSTANDING + 1);

  logic [AXI_AW-1:0] next_addr;
  logic [31:0]       to_request, to_receive;
  logic [OW-1:0]     outstanding;
  logic [8:0]        this_len;
  logic              ar_fire, r_fire, r_last_fire;

  assign this_len    = (to_request > 32'(BURST_LEN)) ? 9'(BURST_LEN) : 9'(to_request);
  assign ar.addr     = next_addr;
  assign ar.len      = 8'(this_len - 9'd1);
  assign ar.size     = 3'($clog2(BYTES_PER_BEAT));
  assign ar.burst    = 2'b01;                       // INCR
  assign ar.valid    = busy && (to_request != '0) && (outstanding < OW'(MAX_OUTSTANDING));
  assign ar_fire     = ar.valid && arready;

  assign out_data    = r.data;
  assign out_valid   = r.valid && busy;
  assign rready      = out_ready && busy;
  assign r_fire      = r.valid && rready;
  assign r_last_fire = r_fire && r.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      error       <= 1'b0;
      next_addr   <= '0;
      to_request  <= '0;
      to_receive  <= '0;
      outstanding <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy        <= (n_beats != '0);
        done        <= (n_beats == '0);
        error       <= 1'b0;
        next_addr   <= base_addr;
        to_request  <= n_beats;
        to_receive  <= n_beats;
        outstanding <= '0;
      end else begin
        if (ar_fire) begin
          next_addr  <= next_addr + AXI_AW'(this_len) * AXI_AW'(BYTES_PER_BEAT);
          to_request <= to_request - 32'(this_len);
        end
        outstanding <= outstanding + OW'(ar_fire) - OW'(r_last_fire);
        if (r_fire) begin
          if (r.resp != 2'b00) error <= 1'b1;
          to_receive <= to_receive - 32'd1;
          if (to_receive == 32'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) ar.valid && !arready |=> ar.valid && $stable(ar.addr) && $stable(ar.len));
  assert property (@(posedge clk) disable iff (!rst_n) r_last_fire |-> outstanding != '0);

endmodule
