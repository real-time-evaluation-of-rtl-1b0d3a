// seq_div: unsigned restoring divider, one quotient bit per clock.
//
// On `start` it latches `num` and `den`; W+1 clocks later `done` pulses with
// quot = num / den (truncated). A zero divisor gives an all-ones quotient.
// Helper of the discriminators (normalised early-minus-late).
module seq_div #(
  parameter int W = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         done,
  output logic [W-1:0] quot
);

  logic [W-1:0]   q, d;
  logic [W:0]     r;
  logic [$clog2(W+1)-1:0] cnt;
  logic           busy;
  logic [W:0]     r_sh;

  assign r_sh = {r[W-1:0], q[W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; d <= '0; r <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; quot <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q    <= num;
        d    <= den;
        r    <= '0;
        cnt  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        if (int'(cnt) == W) begin
          busy <= 1'b0;
          done <= 1'b1;
          quot <= q;
        end else begin
          if (r_sh >= {1'b0, d}) begin
            r <= r_sh - {1'b0, d};
            q <= {q[W-2:0], 1'b1};
          end else begin
            r <= r_sh;
            q <= {q[W-2:0], 1'b0};
          end
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
