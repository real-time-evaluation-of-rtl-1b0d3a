// signal_generator: local replica of one channel (code and carrier).
//
// Holds the spreading code of the tracked satellite in a CODE_LEN-bit
// memory. For GPS (CONST = CONST_GPS) the memory is filled by an internal
// C/A generator after `prn_load` (CODE_LEN cycles, `ready` then rises); for
// Galileo E1-B the primary code is a memory code, so software writes it in
// 32-bit words through `wr_en/wr_addr/wr_data` (chip n is bit n%32 of word
// n/32) and sets `ready` with `prn_load`.
// From the NCO state (tau_NCO = code_chip + code_frac, phi_NCO = carr_phase)
// it forms, combinationally:
//  * the Early, Prompt and Late code chips at tau_NCO + EL_HALF, tau_NCO,
//    tau_NCO - EL_HALF (EL_HALF in 2^-32 chip), as bits (1 means -1), with
//    the BOC(1,1) sub-carrier (sign flips in the second half chip) added for
//    Galileo;
//  * the carrier replica cos/sin from the top 3 phase bits, values in
//    {0, +-2, +-3}.
// The paper names this block (code and carrier replicas from tau_NCO and
// phi_NCO); the code memory, the correlator spacing, the 8-phase carrier
// table and the way the Galileo code is loaded are this design's own.
module signal_generator
  import utalfa_pkg::*;
#(
  parameter constellation_e CONST    = CONST_GPS,
  parameter int             CODE_LEN = GPS_CODE_LEN,
  parameter logic [31:0]    EL_HALF  = 32'h8000_0000   // 0.5 chip
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        prn_load,
  input  logic [5:0]                  prn,
  input  logic                        wr_en,
  input  logic [6:0]                  wr_addr,
  input  logic [31:0]                 wr_data,
  output logic                        ready,
  input  logic [$clog2(CODE_LEN)-1:0] code_chip,
  input  logic [31:0]                 code_frac,
  input  logic [31:0]                 carr_phase,
  output logic                        rep_e,
  output logic                        rep_p,
  output logic                        rep_l,
  output logic signed [2:0]           cos_rep,
  output logic signed [2:0]           sin_rep
);

  localparam int CW = $clog2(CODE_LEN);

  // code memory: 32-chip words, chip n in bit n%32 of word n/32
  localparam int NW = (CODE_LEN + 31) / 32;
  logic [31:0] code_mem [NW];

  // ---------------------------------------------------------------- code fill
  logic          filling;
  logic [CW-1:0] fill_idx;
  logic          ca_chip;

  gps_ca_gen u_ca (
    .clk   (clk),
    .rst_n (rst_n),
    .start (prn_load),
    .prn   (prn),
    .step  (filling),
    .chip  (ca_chip)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      filling  <= 1'b0;
      fill_idx <= '0;
      ready    <= 1'b0;
    end else if (CONST == CONST_GPS) begin
      if (prn_load) begin
        filling  <= 1'b1;
        fill_idx <= '0;
        ready    <= 1'b0;
      end else if (filling) begin
        if (fill_idx == CW'(CODE_LEN - 1)) begin
          filling <= 1'b0;
          ready   <= 1'b1;
        end
        fill_idx <= fill_idx + 1'b1;
      end
    end else begin
      if (wr_en)         ready <= 1'b0;
      else if (prn_load) ready <= 1'b1;
    end
  end

  // memory write port: one chip per clock from the C/A generator (GPS) or
  // one 32-chip word from the bus (Galileo)
  always_ff @(posedge clk) begin
    if (CONST == CONST_GPS) begin
      if (filling && !prn_load) code_mem[fill_idx[CW-1:5]][fill_idx[4:0]] <= ca_chip;
    end else if (wr_en) begin
      code_mem[wr_addr[$clog2(NW)-1:0]] <= wr_data;
    end
  end

  // ---------------------------------------------------------------- E/P/L
  function automatic logic chip_at(input logic [CW-1:0] c, input logic [31:0] f);
    logic        sub;
    logic [31:0] w;
    sub = (CONST == CONST_GAL) ? f[31] : 1'b0;
    w   = code_mem[c[CW-1:5]];
    return w[c[4:0]] ^ sub;
  endfunction

  logic [32:0]   e_sum;
  logic [32:0]   l_diff;
  logic [CW-1:0] e_chip, l_chip;

  always_comb begin
    e_sum  = {1'b0, code_frac} + {1'b0, EL_HALF};
    l_diff = {1'b0, code_frac} - {1'b0, EL_HALF};
    if (!e_sum[32])                           e_chip = code_chip;
    else if (code_chip == CW'(CODE_LEN - 1))  e_chip = '0;
    else                                      e_chip = code_chip + 1'b1;
    if (!l_diff[32])                          l_chip = code_chip;
    else if (code_chip == '0)                 l_chip = CW'(CODE_LEN - 1);
    else                                      l_chip = code_chip - 1'b1;
    rep_e = chip_at(e_chip, e_sum[31:0]);
    rep_p = chip_at(code_chip, code_frac);
    rep_l = chip_at(l_chip, l_diff[31:0]);
  end

  // ---------------------------------------------------------------- carrier
  always_comb begin
    unique case (carr_phase[31:29])
      3'd0: begin cos_rep =  3'sd3; sin_rep =  3'sd0; end
      3'd1: begin cos_rep =  3'sd2; sin_rep =  3'sd2; end
      3'd2: begin cos_rep =  3'sd0; sin_rep =  3'sd3; end
      3'd3: begin cos_rep = -3'sd2; sin_rep =  3'sd2; end
      3'd4: begin cos_rep = -3'sd3; sin_rep =  3'sd0; end
      3'd5: begin cos_rep = -3'sd2; sin_rep = -3'sd2; end
      3'd6: begin cos_rep =  3'sd0; sin_rep = -3'sd3; end
      default: begin cos_rep = 3'sd2; sin_rep = -3'sd2; end
    endcase
  end

endmodule
