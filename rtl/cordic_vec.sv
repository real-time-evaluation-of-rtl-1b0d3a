// cordic_vec: iterative CORDIC in vectoring mode (atan2 and magnitude).
//
// On `start` it takes (x, y) and, after ITER+1 clocks, raises `done` for one
// cycle with `angle` = atan2(y, x) in cycles (fx_t, FX_FRAC fractional bits,
// range -0.5 .. +0.5) and `mag` = 1.6468 * sqrt(x^2 + y^2) (the CORDIC gain
// is left in; the discriminators only use ratios of magnitudes). A vector
// in the left half-plane is first turned by half a cycle. One micro-rotation
// per clock; the arctangent table holds atan(2^-i)/(2*pi) * 2^24, rounded.
// A helper of the discriminators; its use there is this design's choice.
module cordic_vec
  import utalfa_pkg::*;
#(
  parameter int W    = 44,
  parameter int ITER = 18
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] x_in,
  input  logic signed [W-1:0] y_in,
  output logic                busy,
  output logic                done,
  output fx_t                 angle,
  output logic signed [W-1:0] mag
);

  function automatic fx_t atan_tab(input int i);
    unique case (i)
      0: return 2097152;   1: return 1238021;   2: return 654136;
      3: return 332050;    4: return 166669;    5: return 83416;
      6: return 41718;     7: return 20860;     8: return 10430;
      9: return 5215;     10: return 2608;     11: return 1304;
     12: return 652;      13: return 326;      14: return 163;
     15: return 81;       16: return 41;       17: return 20;
     18: return 10;       default: return 5;
    endcase
  endfunction

  logic signed [W+1:0] x, y;
  fx_t                 z;
  logic [4:0]          it;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; z <= '0; it <= '0;
      busy <= 1'b0; done <= 1'b0; angle <= '0; mag <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        it   <= '0;
        if (x_in < 0) begin
          x <= -(W+2)'(x_in);
          y <= -(W+2)'(y_in);
          z <= (y_in >= 0) ? fx_t'(1 <<< (FX_FRAC - 1)) : -fx_t'(1 <<< (FX_FRAC - 1));
        end else begin
          x <= (W+2)'(x_in);
          y <= (W+2)'(y_in);
          z <= '0;
        end
      end else if (busy) begin
        if (int'(it) == ITER) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          angle <= z;
          mag   <= W'(x);
        end else begin
          if (y >= 0) begin
            x <= x + (y >>> it);
            y <= y - (x >>> it);
            z <= z + atan_tab(int'(it));
          end else begin
            x <= x - (y >>> it);
            y <= y + (x >>> it);
            z <= z - atan_tab(int'(it));
          end
          it <= it + 1'b1;
        end
      end
    end
  end

endmodule
