// ddr_axi_model -- behavioural model of the DRAM behind one high-performance
// AXI port, read side only. Not synthesizable.
//
// Accepts AR requests (arready randomly withheld when STALLS is set), queues
// them and returns their beats in order on R, with random idle cycles when
// STALLS is set. The data of every beat is generated from its address by
// tb_awq_pkg::gen_beat from its offset to BASE, so the model needs no storage. It checks the AXI
// rules the accelerator relies on (INCR bursts of 16-byte beats that do not
// cross a 4 KB boundary) and counts violations, the largest number of bursts
// in flight and the cycles it withheld data.
module ddr_axi_model
  import awq_pkg::*;
  import tb_awq_pkg::*;
#(
  parameter int unsigned BPM    = 18,
  parameter longint unsigned BASE = 0,   // address of the first macro
  parameter logic [31:0] SEED   = 32'h1,
  parameter bit          STALLS = 1'b1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  axi_ar_t ar,
  output logic    arready,
  output axi_r_t  r,
  input  logic    rready
);

  typedef struct { longint unsigned addr; int unsigned len; } burst_t;
  burst_t q [$];
  int unsigned beat;
  int unsigned violations = 0;
  int unsigned max_inflight = 0;
  int unsigned stall_cycles = 0;
  int unsigned ar_stall_cycles = 0;
  logic give;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready <= 1'b0;
      give    <= 1'b0;
    end else begin
      arready <= STALLS ? ($urandom_range(0, 3) != 0) : 1'b1;
      give    <= STALLS ? ($urandom_range(0, 4) != 0) : 1'b1;
    end
  end

  always_comb begin
    r = '0;
    if (q.size() > 0 && give) begin
      r.valid = 1'b1;
      r.data  = gen_beat(q[0].addr - BASE + longint'(beat) * BEAT_BYTES, BPM, SEED);
      r.last  = (beat == q[0].len - 1);
      r.resp  = 2'b00;
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (ar.valid && !arready) ar_stall_cycles++;
      if (q.size() > 0 && !give) stall_cycles++;
      if (r.valid && rready) begin
        if (beat == q[0].len - 1) begin
          void'(q.pop_front());
          beat <= 0;
        end else begin
          beat <= beat + 1;
        end
      end
      if (ar.valid && arready) begin
        burst_t b;
        b.addr = longint'(ar.addr);
        b.len  = int'(ar.len) + 1;
        if (ar.size != 3'd4 || ar.burst != 2'b01) violations++;
        if ((b.addr / 4096) != ((b.addr + b.len * 16 - 1) / 4096)) violations++;
        if (b.addr % 16 != 0) violations++;
        q.push_back(b);
        if (q.size() > max_inflight) max_inflight = q.size();
      end
    end else begin
      beat <= 0;
      q.delete();
    end
  end

endmodule
