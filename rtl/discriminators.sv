// discriminators: code, phase and frequency error from one set of
// correlator outputs.
//
// Started by `dump` with the new E/P/L sums, it produces, `valid` about 110
// clocks later (four CORDIC runs and one division, run one after another on
// a single CORDIC and a single divider):
//   dphi = atan(Qp/Ip) / 2pi                    Costas PLL, cycles
//   dfd  = atan(cross/dot) / (2pi T)            FLL on two successive
//          dot   = Ip' Ip + Qp' Qp                prompts (' = previous);
//          cross = Ip' Qp - Qp' Ip                Hz
//   dtau = DLL_SCALE * (|L| - |E|) / (|L| + |E|)  normalised envelope DLL,
//                                                 chips
// Both arctangents fold the sign of the in-phase term, so data-bit flips do
// not disturb them. The paper puts the discriminators in hardware and names
// the three errors; the discriminator laws, the CORDIC and the divider are
// this design's own choices. FLL products are formed from the prompt sums
// shifted right by FLL_SHIFT bits to bound their width.
module discriminators
  import utalfa_pkg::*;
#(
  parameter int  INV_T     = 1000,               // 1/T, 1/s
  parameter fx_t DLL_SCALE = fx_t'(1 <<< 23),    // 0.5 for +-0.5 chip E/L
  parameter int  FLL_SHIFT = 6
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  dump,
  input  corr_t corr,
  output disc_t disc,
  output logic  valid
);

  localparam int CW = 44;

  typedef enum logic [2:0] {S_IDLE, S_PLL, S_FLL, S_EARLY, S_LATE, S_DIV} state_e;
  state_e state;

  corr_t                c;
  logic signed [31:0]   ip_prev, qp_prev;
  logic                 c_start, c_done;
  logic signed [CW-1:0] cx, cy, c_mag;
  fx_t                  c_ang;
  logic signed [CW-1:0] mag_e;
  logic                 d_start, d_done;
  logic [63:0]          d_num, d_den, d_quot;
  logic                 num_neg;

  cordic_vec #(.W(CW)) u_cordic (
    .clk(clk), .rst_n(rst_n), .start(c_start), .x_in(cx), .y_in(cy),
    .busy(), .done(c_done), .angle(c_ang), .mag(c_mag)
  );

  seq_div #(.W(64)) u_div (
    .clk(clk), .rst_n(rst_n), .start(d_start), .num(d_num), .den(d_den),
    .done(d_done), .quot(d_quot)
  );

  // CORDIC operands for each step
  logic signed [31:0] ip_s, qp_s, ipp_s, qpp_s;
  logic signed [CW-1:0] dot, crs;
  always_comb begin
    ip_s  = c.ip >>> FLL_SHIFT;
    qp_s  = c.qp >>> FLL_SHIFT;
    ipp_s = ip_prev >>> FLL_SHIFT;
    qpp_s = qp_prev >>> FLL_SHIFT;
    dot   = CW'(ipp_s * ip_s) + CW'(qpp_s * qp_s);
    crs = CW'(ipp_s * qp_s) - CW'(qpp_s * ip_s);
    unique case (state)
      S_PLL: begin
        cx = (c.ip < 0) ? -CW'(c.ip) : CW'(c.ip);
        cy = (c.ip < 0) ? -CW'(c.qp) : CW'(c.qp);
      end
      S_FLL: begin
        cx = (dot < 0) ? -dot : dot;
        cy = (dot < 0) ? -crs : crs;
      end
      S_EARLY: begin cx = CW'(c.ie); cy = CW'(c.qe); end
      default: begin cx = CW'(c.il); cy = CW'(c.ql); end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      c       <= '0;
      ip_prev <= '0;
      qp_prev <= '0;
      c_start <= 1'b0;
      d_start <= 1'b0;
      d_num   <= '0;
      d_den   <= '0;
      num_neg <= 1'b0;
      mag_e   <= '0;
      disc    <= '0;
      valid   <= 1'b0;
    end else begin
      c_start <= 1'b0;
      d_start <= 1'b0;
      valid   <= 1'b0;
      unique case (state)
        S_IDLE: if (dump) begin
          c       <= corr;
          state   <= S_PLL;
          c_start <= 1'b1;
        end
        S_PLL: if (c_done) begin
          disc.dphi <= c_ang;
          state     <= S_FLL;
          c_start   <= 1'b1;
        end
        S_FLL: if (c_done) begin
          disc.dfd <= c_ang * INV_T;
          ip_prev  <= c.ip;
          qp_prev  <= c.qp;
          state    <= S_EARLY;
          c_start  <= 1'b1;
        end
        S_EARLY: if (c_done) begin
          mag_e   <= c_mag;
          state   <= S_LATE;
          c_start <= 1'b1;
        end
        S_LATE: if (c_done) begin
          num_neg <= (c_mag < mag_e);
          d_num   <= (c_mag < mag_e) ? 64'(mag_e - c_mag) << FX_FRAC : 64'(c_mag - mag_e) << FX_FRAC;
          d_den   <= 64'(c_mag + mag_e);
          d_start <= 1'b1;
          state   <= S_DIV;
        end
        default: if (d_done) begin
          disc.dtau <= fx_mul(DLL_SCALE, num_neg ? -fx_t'(d_quot[47:0]) : fx_t'(d_quot[47:0]));
          valid     <= 1'b1;
          state     <= S_IDLE;
        end
      endcase
    end
  end

endmodule
