// snl_dense_layer - one fully connected layer of the network, with weights and
// biases that can be rewritten while the design runs.
//
// The layer takes its NIN inputs as a stream of NIN/PAR beats of PAR values
// and keeps NOUT accumulators, one per neuron, all updated on every accepted
// beat: beat k adds sum over lanes l of x[k*PAR+l] * w[n][k*PAR+l] to neuron
// n. The first beat of a frame starts each accumulator from the neuron's bias
// (shifted to the product's fraction bits). With the last beat, each sum is
// shifted back to the activation format, passed through ReLU when RELU is set,
// saturated to 16 bits and stored in the output register.
//
// Weight store: NIN/PAR rows, each holding the PAR x NOUT weights one beat
// needs (entry n*PAR+l of row k is w[n][k*PAR+l]), plus NOUT biases. The
// write port takes one weight or bias per clock addressed by (neuron, input),
// which is how new network parameters are loaded at run time. A write takes
// effect on the next beat that reads it; the host is expected to reload
// between batches.
//
// Interface: input valid/ready, output valid/ready holding the whole vector.
// Timing: one beat per clock; the output is valid the clock after the last
// beat, i.e. NIN/PAR clocks per frame. Accumulation of the next frame goes on
// while the output waits; only its last beat is held back (in_ready low) while
// the output register is still full.
//
// From the published design: fully connected layers, ReLU on the hidden
// layers, run-time reloadable weights and biases, 8 inputs per clock into the
// first layer. This design's own choices: all neurons of a layer in parallel,
// the fixed-point formats of snl_pkg, saturation, and the write port's form.
module snl_dense_layer
  import snl_pkg::*;
#(
  parameter int unsigned NIN  = N_FEAT,
  parameter int unsigned NOUT = N_HID1,
  parameter int unsigned PAR  = IN_PAR,
  parameter bit          RELU = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  // input stream
  input  logic       in_valid,
  output logic       in_ready,
  input  act_t       in_data [PAR],
  // output vector
  output logic       out_valid,
  input  logic       out_ready,
  output act_t       out_data [NOUT],
  // parameter write port
  input  layer_wr_t  wr
);

  localparam int unsigned BEATS = NIN / PAR;
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1;

  wgt_t wmem [BEATS][NOUT*PAR];
  wgt_t bmem [NOUT];

  // ---- parameter writes ----------------------------------------------------
  always_ff @(posedge clk) begin
    if (wr.en) begin
      if (wr.is_bias) begin
        if (32'(wr.neuron) < NOUT) bmem[32'(wr.neuron)] <= wr.data;
      end else if (32'(wr.neuron) < NOUT && 32'(wr.input_idx) < NIN) begin
        wmem[32'(wr.input_idx) / PAR][32'(wr.neuron) * PAR + 32'(wr.input_idx) % PAR]
          <= wr.data;
      end
    end
  end

  // ---- multiply-accumulate ---------------------------------------------------
  logic [BW-1:0] beat;
  acc_t          acc      [NOUT];
  acc_t          acc_next [NOUT];
  logic          last_beat;
  logic          fire;

  assign last_beat = 32'(beat) == BEATS - 1;
  assign in_ready  = !last_beat || !out_valid || out_ready;
  assign fire      = in_valid && in_ready;

  always_comb begin
    for (int n = 0; n < NOUT; n++) begin
      acc_t sum;
      sum = (beat == '0) ? (acc_t'(bmem[n]) <<< DATA_FRAC) : acc[n];
      for (int l = 0; l < PAR; l++)
        sum += acc_t'(in_data[l]) * acc_t'(wmem[beat][n*PAR + l]);
      acc_next[n] = sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat      <= '0;
      out_valid <= 1'b0;
      for (int n = 0; n < NOUT; n++) begin
        acc[n]      <= '0;
        out_data[n] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        for (int n = 0; n < NOUT; n++) acc[n] <= acc_next[n];
        if (last_beat) begin
          beat      <= '0;
          out_valid <= 1'b1;
          for (int n = 0; n < NOUT; n++) out_data[n] <= requant(acc_next[n], RELU);
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end
  end

  // the output register is never overwritten before it is taken
  a_no_overwrite : assert property (@(posedge clk) disable iff (!rst_n)
                                    (fire && last_beat) |-> (!out_valid || out_ready));

endmodule
