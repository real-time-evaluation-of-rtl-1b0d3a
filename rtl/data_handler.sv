// data_handler: dispatches the front-end samples to acquisition and tracking.
//
// Registers each 8-bit I/Q sample from the front end (`fe_valid`) and
// hands it, one clock later, to the tracking channels (`trk_en`) and, while
// a capture is open, to the acquisition engine (`acq_en`). A capture opens
// on `acq_req` and closes after ACQ_LEN samples (one code-period block of
// the acquisition search), `acq_busy` covering it. It also counts every
// sample (`rx_count`), the receiver time base T_RX used by the observation
// generator. The paper describes the data handler's function, dispatching
// the incoming signal to acquisition and tracking; the capture window and
// the counter are this design's own.
module data_handler
  import utalfa_pkg::*;
#(
  parameter int ACQ_LEN = 4000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fe_valid,
  input  sample_t     fe_sample,
  input  logic        acq_req,
  output sample_t     sample,
  output logic        trk_en,
  output logic        acq_en,
  output logic        acq_busy,
  output logic [63:0] rx_count
);

  logic [$clog2(ACQ_LEN+1)-1:0] left;

  assign acq_busy = (left != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sample   <= '0;
      trk_en   <= 1'b0;
      acq_en   <= 1'b0;
      left     <= '0;
      rx_count <= '0;
    end else begin
      trk_en <= fe_valid;
      acq_en <= fe_valid && acq_busy;
      if (fe_valid) begin
        sample   <= fe_sample;
        rx_count <= rx_count + 1'b1;
      end
      if (acq_req && !acq_busy) left <= $bits(left)'(ACQ_LEN);
      else if (fe_valid && acq_busy) left <= left - 1'b1;
    end
  end

endmodule
