// macro_mac -- MACRO_MAC unit: 8x8 PE array, sliding-window adder tree and
// per-output-channel accumulators.
//
// Work: for one block of 8 output channels it computes
//   y[c] = sum_k (q[k][c] - z_g[c]) * s_g[c] * x[k],  c = 0..7, k = 0..K-1,
// where g = k / GS is the AWQ group, K = n_macros * GS, and the q, z and s
// arrive as rows from the unpacking unit, one input channel k per row.
//
// How it works. Rows enter the PE array one at a time; row r of the array
// holds the 8 weights of input channel k and the activation x[k], read from
// this unit's activation buffer, broadcast along the row. Column c of the
// array belongs to output channel c and uses that channel's zero and scale.
// When all 8 rows are full the 64 PE outputs (p_sum) are captured in a p_sum
// bank in one cycle and the array is free for the next 8 rows. While those
// rows come in, a sliding window steps over the bank one column per cycle:
// the 8 p_sums of the column go through the 8-input adder tree and the
// column sum is added to accumulator c. After the last block of the K rows
// the 8 accumulators leave as one result and the next output block starts
// from zero. Loading 8 rows and sliding over 8 columns both take 8 cycles,
// so the unit sustains one row (8 MACs) per cycle.
//
// Interface: rows with valid/ready (row_ready low only when the array is full
// and the bank is still being reduced); results with valid/ready (a held
// result stalls the last column of the next output block); a write port for
// the activation buffer; n_macros = K/GS, to be stable while a run is active
// (only the bits that can index ACT_DEPTH inputs are read, so lint reports
// the top bits of n_macros as unused at the default size);
// start clears the counters at the beginning of a run.
//
// Timing: a row taken at cycle t reaches the bank at the earliest at t+1
// (when it completes a block); the result of an output block is valid 9
// cycles after its last row was taken if nothing stalls.
//
// From the paper: the 8x8 PE array, the adder tree over a sliding column
// window, accumulation per output channel and handing the sum on when an
// output channel is complete. This design's choices: which array dimension
// is input and which output channel, the p_sum bank that overlaps loading
// with reduction, the activation buffer (the paper does not say where
// activations are kept; here each unit has its own copy, written by the
// host before a run and read one word per cycle) and all handshakes.
module macro_mac
  import awq_pkg::*;
#(
  parameter int unsigned GS        = GS_DEFAULT,
  parameter int unsigned ACT_DEPTH = ACT_DEPTH_DEFAULT,
  localparam int unsigned AW       = $clog2(ACT_DEPTH),
  localparam int unsigned KW       = AW + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   n_macros,
  // activation buffer write port
  input  logic          act_we,
  input  logic [AW-1:0] act_waddr,
  input  fp32_t         act_wdata,
  // rows from the unpacking unit
  input  unpacked_row_t row,
  input  logic          row_valid,
  output logic          row_ready,
  // results
  output result_t       res,
  output logic          res_valid,
  input  logic          res_ready,
  // activity, for monitoring
  output logic          stall_array_full,
  output logic          stall_result
);

  // ---------------------------------------------------------------- buffer
  fp32_t act_mem [ACT_DEPTH];
  fp32_t act_q;                 // activation of input channel k_cnt
  logic [KW-1:0] k_cnt, k_next, k_total;

  assign k_total = KW'(n_macros) * KW'(GS);

  always_ff @(posedge clk) begin
    if (act_we) act_mem[act_waddr] <= act_wdata;
    act_q <= act_mem[AW'(k_next)];
  end

  // ---------------------------------------------------------------- PE array
  typedef struct packed {
    int4_t [N_OC-1:0] qw;
    fp32_t            act;
  } pe_row_t;

  pe_row_t [PE_ROWS-1:0] rows_q;
  int4_t   [N_OC-1:0]    zero_q;
  fp16_t   [N_OC-1:0]    scale_q;
  logic [3:0]            fill;
  fp32_t   [N_OC-1:0]    pe_out [PE_ROWS];

  for (genvar r = 0; r < PE_ROWS; r++) begin : g_row
    for (genvar c = 0; c < N_OC; c++) begin : g_col
      awq_pe u_pe (
        .qweight    (rows_q[r].qw[c]),
        .zero       (zero_q[c]),
        .scale      (scale_q[c]),
        .activation (rows_q[r].act),
        .p_sum      (pe_out[r][c])
      );
    end
  end

  // ---------------------------------------------------------------- p_sum bank
  fp32_t [N_OC-1:0] bank [PE_ROWS];
  logic             bank_valid, bank_first, bank_final;
  logic [2:0]       col;
  logic [KW-1:0]    kb;          // first input channel of the next block to enter the bank
  fp32_t [PE_ROWS-1:0] window;
  fp32_t            col_sum, acc_next;
  fp32_t [N_OC-1:0] acc;
  logic [15:0]      out_blk;

  logic row_fire, transfer, slide, slide_last;

  assign slide      = bank_valid && !(col == 3'(N_OC - 1) && bank_final && res_valid);
  assign slide_last = slide && col == 3'(N_OC - 1);
  assign transfer   = (fill == 4'(PE_ROWS)) && (!bank_valid || slide_last);
  assign row_ready  = (fill < 4'(PE_ROWS)) || transfer;
  assign row_fire   = row_valid && row_ready;
  assign k_next     = row_fire ? ((k_cnt == k_total - 1'b1) ? '0 : k_cnt + 1'b1) : k_cnt;

  assign stall_array_full = (fill == 4'(PE_ROWS)) && !transfer;
  assign stall_result     = bank_valid && !slide;

  always_comb begin
    for (int r = 0; r < PE_ROWS; r++) window[r] = bank[r][col];
  end

  fp32_adder_tree #(.N(PE_ROWS)) u_tree (.in(window), .sum(col_sum));

  assign acc_next = bank_first ? col_sum : fp32_add(acc[col], col_sum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_cnt      <= '0;
      fill       <= '0;
      rows_q     <= '0;
      zero_q     <= '0;
      scale_q    <= '0;
      bank_valid <= 1'b0;
      bank_first <= 1'b0;
      bank_final <= 1'b0;
      col        <= '0;
      kb         <= '0;
      acc        <= '0;
      out_blk    <= '0;
      res        <= '0;
      res_valid  <= 1'b0;
      for (int r = 0; r < PE_ROWS; r++) bank[r] <= '0;
    end else if (start) begin
      k_cnt      <= '0;
      fill       <= '0;
      bank_valid <= 1'b0;
      col        <= '0;
      kb         <= '0;
      out_blk    <= '0;
      res_valid  <= 1'b0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;

      // rows into the array
      if (transfer) fill <= row_fire ? 4'd1 : 4'd0;
      else if (row_fire) fill <= fill + 4'd1;
      if (row_fire) begin
        rows_q[transfer ? 0 : 3'(fill)] <= '{qw: row.qw, act: act_q};
        zero_q  <= row.zero;
        scale_q <= row.scale;
        k_cnt   <= k_next;
      end

      // sliding window over the bank
      if (slide) begin
        acc[col] <= acc_next;
        col      <= col + 3'd1;
        if (slide_last) begin
          bank_valid <= 1'b0;
          if (bank_final) begin
            for (int c = 0; c < N_OC; c++) res.sum[c] <= (c == N_OC - 1) ? acc_next : acc[c];
            res.block <= out_blk;
            res_valid <= 1'b1;
            out_blk   <= out_blk + 16'd1;
          end
        end
      end

      // full array into the bank
      if (transfer) begin
        for (int r = 0; r < PE_ROWS; r++) bank[r] <= pe_out[r];
        bank_valid <= 1'b1;
        bank_first <= (kb == '0);
        bank_final <= (kb + KW'(PE_ROWS) == k_total);
        kb         <= (kb + KW'(PE_ROWS) == k_total) ? '0 : kb + KW'(PE_ROWS);
        col        <= '0;
      end
    end
  end

  // the unpacking unit's macro boundary must agree with the K counter
  assert property (@(posedge clk) disable iff (!rst_n || start)
                   row_fire |-> (row.last == (((k_cnt + 1'b1) % KW'(GS)) == '0)));
  assert property (@(posedge clk) disable iff (!rst_n) res_valid && !res_ready |=> res_valid && $stable(res));

endmodule
