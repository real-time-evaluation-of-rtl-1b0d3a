// correlators: carrier wipe-off and Early/Prompt/Late integrate-and-dump.
//
// Each sample (`sample_en`) is multiplied by the conjugate carrier replica,
//   Im = i*cos + q*sin,   Qm = q*cos - i*sin,
// then by the three code replicas (bit 1 = -1) and added into six 32-bit
// accumulators. On the sample flagged `last` (end of the code period) the
// sums including that sample are copied to `corr`, `dump` pulses for one
// cycle and the accumulators restart from zero. Latency: `dump` is
// registered, one clock after the last sample. The paper places E, P, L
// correlators in hardware; the arithmetic widths are this design's own.
module correlators
  import utalfa_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              sample_en,
  input  sample_t           sample,
  input  logic              last,
  input  logic              rep_e,
  input  logic              rep_p,
  input  logic              rep_l,
  input  logic signed [2:0] cos_rep,
  input  logic signed [2:0] sin_rep,
  output corr_t             corr,
  output logic              dump
);

  logic signed [12:0] im, qm;
  logic signed [31:0] ie_n, qe_n, ip_n, qp_n, il_n, ql_n;
  corr_t acc;

  function automatic logic signed [31:0] spread(input logic signed [12:0] v, input logic neg);
    return neg ? -32'(v) : 32'(v);
  endfunction

  always_comb begin
    im   = 13'(sample.i * cos_rep) + 13'(sample.q * sin_rep);
    qm   = 13'(sample.q * cos_rep) - 13'(sample.i * sin_rep);
    ie_n = acc.ie + spread(im, rep_e);
    qe_n = acc.qe + spread(qm, rep_e);
    ip_n = acc.ip + spread(im, rep_p);
    qp_n = acc.qp + spread(qm, rep_p);
    il_n = acc.il + spread(im, rep_l);
    ql_n = acc.ql + spread(qm, rep_l);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      corr <= '0;
      dump <= 1'b0;
    end else begin
      dump <= 1'b0;
      if (clear) begin
        acc <= '0;
      end else if (sample_en) begin
        if (last) begin
          corr <= '{ie: ie_n, qe: qe_n, ip: ip_n, qp: qp_n, il: il_n, ql: ql_n};
          dump <= 1'b1;
          acc  <= '0;
        end else begin
          acc <= '{ie: ie_n, qe: qe_n, ip: ip_n, qp: qp_n, il: il_n, ql: ql_n};
        end
      end
    end
  end

endmodule
