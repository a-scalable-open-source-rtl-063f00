// readout_drive_combiner: the shared measurement DAC of a qubit group.
//
// Readout pulses of all qubits of a group leave through one DAC channel
// (frequency-multiplexed readout), so the readout-generator outputs of the
// N_IN cores of the group are added sample by sample and the sum is
// saturated to the DAC sample range. One register stage: inputs of cycle t
// appear on out_samples in cycle t+1.
//
// The summing node and the group size of 7 follow the board setup; the
// saturation and the register stage are this design's choices.
module readout_drive_combiner
  import qec_pkg::*;
#(
  parameter int unsigned N_IN = 7
) (
  input  logic      clk,
  input  logic      rst,
  input  dac_word_t in_samples [N_IN],
  output dac_word_t out_samples
);

  localparam int unsigned SUM_W = SAMPLE_W + $clog2(N_IN + 1);
  localparam logic signed [SUM_W-1:0] MAXV = SUM_W'(2**(SAMPLE_W-1) - 1);
  localparam logic signed [SUM_W-1:0] MINV = -SUM_W'(2**(SAMPLE_W-1));

  always_ff @(posedge clk) begin
    if (rst) out_samples <= '0;
    else begin
      for (int n = 0; n < DAC_SPC; n++) begin
        logic signed [SUM_W-1:0] s;
        s = '0;
        for (int i = 0; i < N_IN; i++) s += SUM_W'(in_samples[i][n]);
        if      (s > MAXV) out_samples[n] <= sample_t'(MAXV);
        else if (s < MINV) out_samples[n] <= sample_t'(MINV);
        else               out_samples[n] <= sample_t'(s);
      end
    end
  end

endmodule
