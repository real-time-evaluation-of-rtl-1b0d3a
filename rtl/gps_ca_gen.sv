// gps_ca_gen: GPS L1 C/A Gold-code generator.
//
// Two 10-stage LFSRs, G1 = 1 + x^3 + x^10 and G2 = 1 + x^2 + x^3 + x^6 +
// x^8 + x^9 + x^10, both preset to all ones by `start`. Each `step` shifts
// both registers; the chip is G1(10) xor the two G2 stages that the
// satellite's PRN selects (the phase-selector taps of the GPS interface
// specification, PRN 1..32). `chip` is valid in the cycle before `step`,
// so the first chip after `start` is chip 0 of the code. The receiver uses
// it to fill the C/A code memory of a GPS channel; the paper names the
// replica generator, the generator itself is the standard one.
module gps_ca_gen (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [5:0] prn,     // 1..32
  input  logic       step,
  output logic       chip
);

  logic [10:1] g1, g2;
  logic [3:0]  s1, s2;

  always_comb begin
    unique case (prn)
      6'd1 :  {s1, s2} = {4'd2, 4'd6};
      6'd2 :  {s1, s2} = {4'd3, 4'd7};
      6'd3 :  {s1, s2} = {4'd4, 4'd8};
      6'd4 :  {s1, s2} = {4'd5, 4'd9};
      6'd5 :  {s1, s2} = {4'd1, 4'd9};
      6'd6 :  {s1, s2} = {4'd2, 4'd10};
      6'd7 :  {s1, s2} = {4'd1, 4'd8};
      6'd8 :  {s1, s2} = {4'd2, 4'd9};
      6'd9 :  {s1, s2} = {4'd3, 4'd10};
      6'd10:  {s1, s2} = {4'd2, 4'd3};
      6'd11:  {s1, s2} = {4'd3, 4'd4};
      6'd12:  {s1, s2} = {4'd5, 4'd6};
      6'd13:  {s1, s2} = {4'd6, 4'd7};
      6'd14:  {s1, s2} = {4'd7, 4'd8};
      6'd15:  {s1, s2} = {4'd8, 4'd9};
      6'd16:  {s1, s2} = {4'd9, 4'd10};
      6'd17:  {s1, s2} = {4'd1, 4'd4};
      6'd18:  {s1, s2} = {4'd2, 4'd5};
      6'd19:  {s1, s2} = {4'd3, 4'd6};
      6'd20:  {s1, s2} = {4'd4, 4'd7};
      6'd21:  {s1, s2} = {4'd5, 4'd8};
      6'd22:  {s1, s2} = {4'd6, 4'd9};
      6'd23:  {s1, s2} = {4'd1, 4'd3};
      6'd24:  {s1, s2} = {4'd4, 4'd6};
      6'd25:  {s1, s2} = {4'd5, 4'd7};
      6'd26:  {s1, s2} = {4'd6, 4'd8};
      6'd27:  {s1, s2} = {4'd7, 4'd9};
      6'd28:  {s1, s2} = {4'd8, 4'd10};
      6'd29:  {s1, s2} = {4'd1, 4'd6};
      6'd30:  {s1, s2} = {4'd2, 4'd7};
      6'd31:  {s1, s2} = {4'd3, 4'd8};
      6'd32:  {s1, s2} = {4'd4, 4'd9};
      default: {s1, s2} = {4'd2, 4'd6};
    endcase
  end

  assign chip = g1[10] ^ g2[s1] ^ g2[s2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g1 <= '1;
      g2 <= '1;
    end else if (start) begin
      g1 <= '1;
      g2 <= '1;
    end else if (step) begin
      g1 <= {g1[9:1], g1[3] ^ g1[10]};
      g2 <= {g2[9:1], g2[2] ^ g2[3] ^ g2[6] ^ g2[8] ^ g2[9] ^ g2[10]};
    end
  end

endmodule
