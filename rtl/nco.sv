// nco: code and carrier numerically controlled oscillators of one channel.
//
// Two phase accumulators advance once per input sample (`sample_en`):
//  * carrier: 32-bit phase in cycles (2^32 = one cycle), increment
//    f_PLL * 2^32 / FS_HZ. Its top bits are the replica phase phi_NCO.
//  * code: chip index (0 .. CODE_LEN-1) plus a 32-bit chip fraction,
//    increment (FCHIP - f_DLL) * 2^32 / FS_HZ. The pair is tau_NCO.
// `last` is high, combinationally, on the sample after which the chip index
// wraps: the end of one code period, which is also the end of an integration
// period. `epochs` counts the wraps (receiver-side code-period count).
// New frequencies are taken from `cmd` when `cmd_valid` pulses; `load`
// presets the code phase (`load_chip`, `load_frac`), zeroes the carrier phase
// and sets both frequencies from the Doppler `load_fd` (hand-over from
// acquisition, or one search cell of the acquisition engine).
// What the NCOs compute follows the paper (code and carrier NCOs driven by
// f_DLL and f_PLL); the word widths and the hand-over port are this
// design's own.
module nco
  import utalfa_pkg::*;
#(
  parameter int CODE_LEN = GPS_CODE_LEN
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        sample_en,
  input  logic                        load,
  input  logic [$clog2(CODE_LEN)-1:0] load_chip,
  input  logic [31:0]                 load_frac,
  input  fx_t                         load_fd,      // Hz
  input  logic                        cmd_valid,
  input  lf_out_t                     cmd,
  output logic [$clog2(CODE_LEN)-1:0] code_chip,
  output logic [31:0]                 code_frac,
  output logic [31:0]                 carr_phase,
  output logic [31:0]                 code_inc,
  output logic [31:0]                 carr_inc,
  output logic                        last,
  output logic [31:0]                 epochs
);

  localparam int CW = $clog2(CODE_LEN);

  function automatic logic [31:0] hz_to_inc(input fx_t f);
    logic signed [2*FX_W-1:0] p;
    p = f * NCO_PER_HZ;
    return p[2*FX_FRAC +: 32];
  endfunction

  logic [32:0] frac_sum;
  assign frac_sum = {1'b0, code_frac} + {1'b0, code_inc};
  assign last = sample_en && frac_sum[32] && (code_chip == CW'(CODE_LEN - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code_chip  <= '0;
      code_frac  <= '0;
      carr_phase <= '0;
      code_inc   <= hz_to_inc(FCHIP_FX);
      carr_inc   <= '0;
      epochs     <= '0;
    end else if (load) begin
      code_chip  <= load_chip;
      code_frac  <= load_frac;
      carr_phase <= '0;
      code_inc   <= hz_to_inc(FCHIP_FX + fx_mul(SF_L1, load_fd));
      carr_inc   <= hz_to_inc(load_fd);
      epochs     <= '0;
    end else begin
      if (cmd_valid) begin
        code_inc <= hz_to_inc(FCHIP_FX - cmd.f_dll);
        carr_inc <= hz_to_inc(cmd.f_pll);
      end
      if (sample_en) begin
        carr_phase <= carr_phase + carr_inc;
        code_frac  <= frac_sum[31:0];
        if (frac_sum[32]) begin
          if (code_chip == CW'(CODE_LEN - 1)) begin
            code_chip <= '0;
            epochs    <= epochs + 1;
          end else begin
            code_chip <= code_chip + 1'b1;
          end
        end
      end
    end
  end

endmodule
