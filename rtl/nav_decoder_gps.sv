// nav_decoder_gps: GPS L1 C/A navigation-data decoder of one channel.
//
// Fed with the sign of the prompt in-phase sum once per 1 ms integration
// (`ms_valid`, `ip_neg`), it works in three stages:
//  1. bit synchronisation: a 20-bin histogram of sign changes, indexed by
//     the millisecond count modulo 20; when one bin reaches SYNC_TH the bit
//     edge is that bin (`bit_sync`);
//  2. bit decision: the 20 signs of one bit are voted, giving one data bit
//     per 20 ms;
//  3. frame synchronisation: the TLM preamble 10001011 (either polarity,
//     the Costas loop leaves a sign ambiguity) whose word passes parity
//     starts the subframe; every following 30-bit word is parity checked
//     and put out (`word_valid`, `word`, `word_idx` 0..9, `word_ok`).
//     The subframe ID (bits 20-22 of the HOW, word 1) of each subframe that
//     passes parity is recorded; `eph_valid` rises once subframes 1, 2 and 3
//     (the ephemeris) have been seen. A TLM that no longer shows the
//     preamble drops frame sync.
// The paper puts the navigation-data decoders in hardware and uses decoded
// ephemeris as the condition for ultra-tight mode; how the decoder works is
// this design's own, following the GPS signal structure.
module nav_decoder_gps
  import gps_parity_pkg::*;
#(
  parameter int SYNC_TH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        ms_valid,
  input  logic        ip_neg,
  output logic        bit_sync,
  output logic        bit_valid,
  output logic        bit_val,
  output logic        frame_sync,
  output logic        word_valid,
  output logic [29:0] word,        // polarity corrected, D1 in bit 29
  output logic [3:0]  word_idx,
  output logic        word_ok,
  output logic [2:0]  subframe_id,
  output logic        eph_valid
);

  localparam logic [7:0] PREAMBLE = 8'b1000_1011;

  // ---------------------------------------------------------------- bit sync
  logic [4:0] ms_cnt;
  logic [4:0] edge_bin;
  logic [4:0] hist [20];
  logic       prev_neg;
  logic signed [5:0] vote;

  // ---------------------------------------------------------------- framing
  logic [31:0] sr;
  logic        inv;
  logic [4:0]  bit_cnt;
  logic [3:0]  widx;
  logic [3:1]  sf_seen;

  logic [31:0] sr_n;
  logic [31:0] sr_c;          // polarity corrected
  logic        new_bit;
  logic        nb_val;

  assign new_bit = ms_valid && bit_sync && (ms_cnt == edge_bin);
  assign nb_val  = (vote < 0);
  assign sr_n    = {sr[30:0], nb_val};

  always_comb begin
    sr_c = sr_n ^ {32{inv}};
  end

  logic pre_pos, pre_neg;
  assign pre_pos = (sr_n[29:22] == PREAMBLE) && gps_word_ok(sr_n[31], sr_n[30], sr_n[29:0]);
  assign pre_neg = (sr_n[29:22] == ~PREAMBLE) && gps_word_ok(~sr_n[31], ~sr_n[30], ~sr_n[29:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ms_cnt <= '0; edge_bin <= '0; prev_neg <= 1'b0; vote <= '0;
      for (int i = 0; i < 20; i++) hist[i] <= '0;
      bit_sync <= 1'b0; bit_valid <= 1'b0; bit_val <= 1'b0;
      sr <= '0; inv <= 1'b0; bit_cnt <= '0; widx <= '0; sf_seen <= '0;
      frame_sync <= 1'b0; word_valid <= 1'b0; word <= '0; word_idx <= '0;
      word_ok <= 1'b0; subframe_id <= '0; eph_valid <= 1'b0;
    end else if (clear) begin
      ms_cnt <= '0; edge_bin <= '0; prev_neg <= 1'b0; vote <= '0;
      for (int i = 0; i < 20; i++) hist[i] <= '0;
      bit_sync <= 1'b0; bit_valid <= 1'b0; bit_val <= 1'b0;
      sr <= '0; inv <= 1'b0; bit_cnt <= '0; widx <= '0; sf_seen <= '0;
      frame_sync <= 1'b0; word_valid <= 1'b0; word <= '0; word_idx <= '0;
      word_ok <= 1'b0; subframe_id <= '0; eph_valid <= 1'b0;
    end else begin
      bit_valid  <= 1'b0;
      word_valid <= 1'b0;
      if (ms_valid) begin
        prev_neg <= ip_neg;
        ms_cnt   <= (ms_cnt == 5'd19) ? '0 : ms_cnt + 1'b1;
        // histogram of sign changes until synchronised
        if (!bit_sync && (ip_neg != prev_neg)) begin
          hist[ms_cnt] <= hist[ms_cnt] + 1'b1;
          if (hist[ms_cnt] == 5'(SYNC_TH - 1)) begin
            bit_sync <= 1'b1;
            edge_bin <= ms_cnt;
          end
        end
        // voting; a new bit starts at the edge bin
        if (new_bit) vote <= ip_neg ? -6'sd1 : 6'sd1;
        else         vote <= vote + (ip_neg ? -6'sd1 : 6'sd1);
      end

      if (new_bit) begin
        bit_valid <= 1'b1;
        bit_val   <= nb_val;
        sr        <= sr_n;
        if (!frame_sync) begin
          if (pre_pos || pre_neg) begin
            frame_sync  <= 1'b1;
            inv         <= pre_neg;
            bit_cnt     <= '0;
            widx        <= 4'd1;
            word_valid  <= 1'b1;
            word        <= pre_neg ? ~sr_n[29:0] : sr_n[29:0];
            word_idx    <= 4'd0;
            word_ok     <= 1'b1;
          end
        end else begin
          if (bit_cnt == 5'd29) begin
            bit_cnt    <= '0;
            word_valid <= 1'b1;
            word       <= sr_c[29:0];
            word_idx   <= widx;
            word_ok    <= gps_word_ok(sr_c[31], sr_c[30], sr_c[29:0]);
            widx       <= (widx == 4'd9) ? '0 : widx + 1'b1;
            if (widx == 4'd1 && gps_word_ok(sr_c[31], sr_c[30], sr_c[29:0])) begin
              // HOW: data bits d20..d22 (D30* corrected) hold the subframe ID
              subframe_id <= sr_c[10:8] ^ {3{sr_c[30]}};
              unique case (sr_c[10:8] ^ {3{sr_c[30]}})
                3'd1: sf_seen[1] <= 1'b1;
                3'd2: sf_seen[2] <= 1'b1;
                3'd3: sf_seen[3] <= 1'b1;
                default: ;
              endcase
            end
            if (widx == 4'd0 && sr_c[29:22] != PREAMBLE) begin
              frame_sync <= 1'b0;
            end
          end else begin
            bit_cnt <= bit_cnt + 1'b1;
          end
        end
      end
      eph_valid <= &sf_seen;
    end
  end

endmodule
