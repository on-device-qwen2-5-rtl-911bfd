// awq_unpack -- unpacking unit: turns the 128-bit beats of AWQ macros into
// rows of INT4 weights for a MACRO_MAC unit.
//
// An AWQ macro is 2 + GS/4 consecutive beats:
//   beat 0          8 FP16 scales, scale j in bits [16j+15:16j]
//   beat 1          8 INT4 zeros in bits [31:0], zero j in bits [4j+3:4j];
//                   bits [127:32] are padding and are ignored
//   beats 2..       four 32-bit qweight words each, word w in bits [32w+31:32w];
//                   word w of qweight beat b belongs to input channel 4b+w of
//                   the group, and its nibble j (bits [4j+3:4j]) is the weight
//                   of output channel j
// The scales and zeros are held in registers for the whole macro. A qweight
// beat is kept in a buffer and its four words are split into nibbles by
// shift-and-mask, one word per cycle, each leaving as one row
// (awq_pkg::unpacked_row_t) that carries the macro's zeros and scales. Scales
// stay in FP16 here.
//
// Interface: valid/ready on both sides. in_ready is high while the buffer is
// empty or its last word is leaving, so a qweight beat is taken every fourth
// cycle and the two header beats cost one cycle each: a GS=64 macro takes 66
// cycles for 64 rows when the output never stalls. out_row.last marks the
// last row of a macro.
//
// Beat layout, group size 64, 128-bit beats, 8 weights per word, scales kept
// in FP16 and zeros in a 32-bit field padded with 96 zero bits follow the
// paper. The order of words within a beat and of nibbles within a word
// (lowest first), and the handshake, are this design's choices.
module awq_unpack
  import awq_pkg::*;
#(
  parameter int unsigned GS = GS_DEFAULT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [BEAT_W-1:0] in_data,
  input  logic              in_valid,
  output logic              in_ready,
  output unpacked_row_t     out_row,
  output logic              out_valid,
  input  logic              out_ready
);

  localparam int unsigned QBEATS = GS / WORDS_PER_BEAT;   // GS/4 qweight beats
  localparam int unsigned NBEATS = QBEATS + 2;
  localparam int unsigned CW     = $clog2(NBEATS);

  initial assert (GS % PE_ROWS == 0)
    else $error("GS must be a multiple of %0d", PE_ROWS);

  logic [CW-1:0]        beat_cnt;
  fp16_t [N_OC-1:0]     scale_q;
  int4_t [N_OC-1:0]     zero_q;
  logic [BEAT_W-1:0]    qbuf;
  logic                 qbuf_valid;
  logic                 qbuf_last;
  logic [1:0]           widx;
  logic                 in_fire, out_fire;
  logic [31:0]          word;

  assign out_valid = qbuf_valid;
  assign out_fire  = out_valid && out_ready;
  assign in_ready  = !qbuf_valid || (out_fire && widx == 2'(WORDS_PER_BEAT - 1));
  assign in_fire   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_cnt   <= '0;
      scale_q    <= '0;
      zero_q     <= '0;
      qbuf       <= '0;
      qbuf_valid <= 1'b0;
      qbuf_last  <= 1'b0;
      widx       <= '0;
    end else begin
      if (out_fire) begin
        widx <= widx + 2'd1;
        if (widx == 2'(WORDS_PER_BEAT - 1)) qbuf_valid <= 1'b0;
      end
      if (in_fire) begin
        beat_cnt <= (beat_cnt == CW'(NBEATS - 1)) ? '0 : beat_cnt + 1'b1;
        if (beat_cnt == '0) begin
          for (int j = 0; j < N_OC; j++) scale_q[j] <= in_data[16*j +: 16];
        end else if (beat_cnt == CW'(1)) begin
          for (int j = 0; j < N_OC; j++) zero_q[j] <= in_data[4*j +: 4];
        end else begin
          qbuf       <= in_data;
          qbuf_valid <= 1'b1;
          qbuf_last  <= (beat_cnt == CW'(NBEATS - 1));
          widx       <= '0;
        end
      end
    end
  end

  // shift-and-mask split of the current 32-bit qweight word
  always_comb begin
    word = 32'(qbuf >> (32 * widx));
    for (int j = 0; j < N_OC; j++) out_row.qw[j] = 4'((word >> (4 * j)) & 32'hf);
    out_row.zero  = zero_q;
    out_row.scale = scale_q;
    out_row.last  = qbuf_last && (widx == 2'(WORDS_PER_BEAT - 1));
  end

  // a stalled row is held unchanged until it is taken
  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_row));

endmodule
