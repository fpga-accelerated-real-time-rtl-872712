// snl_mlp_core - the network: 768 inputs, two hidden layers of 50 ReLU
// neurons, and an output layer of up to 4 neurons.
//
// Layer 1 eats the pre-processor's stream directly, 8 features per clock, so
// a 768-feature frame takes 96 clocks. Its 50 results are re-sent one per
// clock to layer 2 (50 clocks), whose results are re-sent one per clock to the
// output layer (50 clocks). Each stage is shorter than layer 1, so the three
// layers work on three different frames at once and the core accepts a new
// frame every 96 clocks. The output layer has no activation function: its
// values are the raw class scores (or the single score of a binary task).
//
// All weights and biases sit in the layers' own stores and are written through
// the three layer write ports (see snl_param_loader); loading a different
// parameter set switches the task without rebuilding the hardware.
//
// Interface: input valid/ready stream with in_frame_last on the 96th beat of
// each frame (checked by an assertion); output valid/ready, one vector of
// NO values per frame, frames in order. Timing at the defaults, with no
// back-pressure: a frame's result is valid 96 + 1 + 50 + 1 + 50 = 198
// clocks after its first beat is accepted (1.19 us at a 6 ns clock); 18
// frames in a row finish 17 x 96 + 198 = 1830 clocks after the first beat.
//
// From the published design: the 768-50-50-(1..4) fully connected topology,
// ReLU on the hidden layers, the 8-wide input, run-time reloadable parameters,
// a fully pipelined data flow. This design's own choices: the per-layer
// parallelism (all neurons of a layer at once, 8 inputs per clock into layer
// 1 and one input per clock into layers 2 and 3) and the fixed-point formats.
module snl_mlp_core
  import snl_pkg::*;
#(
  parameter int unsigned NI   = N_FEAT,
  parameter int unsigned NH1  = N_HID1,
  parameter int unsigned NH2  = N_HID2,
  parameter int unsigned NO   = N_OUT,
  parameter int unsigned PAR  = IN_PAR
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  act_t       in_data [PAR],
  input  logic       in_frame_last,
  output logic       out_valid,
  input  logic       out_ready,
  output act_t       out_data [NO],
  input  layer_wr_t  wr_l1,
  input  layer_wr_t  wr_l2,
  input  layer_wr_t  wr_l3
);

  logic h1_valid, h1_ready;
  act_t h1 [NH1];
  logic s1_valid, s1_ready;
  act_t s1 [1];
  logic s1_last;
  logic h2_valid, h2_ready;
  act_t h2 [NH2];
  logic s2_valid, s2_ready;
  act_t s2 [1];
  logic s2_last;

  snl_dense_layer #(.NIN(NI), .NOUT(NH1), .PAR(PAR), .RELU(1'b1)) u_l1 (
    .clk, .rst_n,
    .in_valid (in_valid), .in_ready (in_ready), .in_data (in_data),
    .out_valid(h1_valid), .out_ready(h1_ready), .out_data(h1),
    .wr       (wr_l1)
  );

  snl_vec_serializer #(.N(NH1), .PAR(1)) u_s1 (
    .clk, .rst_n,
    .in_valid (h1_valid), .in_ready (h1_ready), .in_data (h1),
    .out_valid(s1_valid), .out_ready(s1_ready), .out_data(s1), .out_last(s1_last)
  );

  snl_dense_layer #(.NIN(NH1), .NOUT(NH2), .PAR(1), .RELU(1'b1)) u_l2 (
    .clk, .rst_n,
    .in_valid (s1_valid), .in_ready (s1_ready), .in_data (s1),
    .out_valid(h2_valid), .out_ready(h2_ready), .out_data(h2),
    .wr       (wr_l2)
  );

  snl_vec_serializer #(.N(NH2), .PAR(1)) u_s2 (
    .clk, .rst_n,
    .in_valid (h2_valid), .in_ready (h2_ready), .in_data (h2),
    .out_valid(s2_valid), .out_ready(s2_ready), .out_data(s2), .out_last(s2_last)
  );

  snl_dense_layer #(.NIN(NH2), .NOUT(NO), .PAR(1), .RELU(1'b0)) u_l3 (
    .clk, .rst_n,
    .in_valid (s2_valid), .in_ready (s2_ready), .in_data (s2),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .wr       (wr_l3)
  );

  // frame boundaries of the input stream line up with layer 1's beat count
  logic [$clog2(NI/PAR+1)-1:0] in_beat;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_beat <= '0;
    else if (in_valid && in_ready)
      in_beat <= (32'(in_beat) == NI/PAR - 1) ? '0 : in_beat + 1'b1;
  end
  a_frame_align : assert property (@(posedge clk) disable iff (!rst_n)
      (in_valid && in_ready) |-> (in_frame_last == (32'(in_beat) == NI/PAR - 1)));

  // the serializers' last flags match the next layer's frame length by design
  a_s1_len : assert property (@(posedge clk) disable iff (!rst_n)
      (s1_valid && s1_ready && s1_last) |-> (32'(u_l2.beat) == NH1 - 1));
  a_s2_len : assert property (@(posedge clk) disable iff (!rst_n)
      (s2_valid && s2_ready && s2_last) |-> (32'(u_l3.beat) == NH2 - 1));

endmodule
