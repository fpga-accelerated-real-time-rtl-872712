// bes_ml_top - FPGA data path of the real-time BES inference node: digitizer
// samples in, per-frame class scores out, network parameters reloadable while
// it runs.
//
//   digitizer stream --> bes_preprocessor --> snl_mlp_core --> bes_postprocessor --> PCIe
//                         (16 of 160 ch,       (768-50-50-4)     (18 results
//                          18 x 768 batch,                        per block)
//                          8 features/clk)
//   host write bus   --> snl_param_loader --> layer weights/biases, channel table,
//                                             number of active outputs
//
// Interface (all on one clock, active-low asynchronous reset):
//   dig_*   digitizer stream: one 18-bit sample per clock, channels 0..159 of
//           a time slice in order, dig_last on channel 159. No back-pressure.
//   p_*     host parameter/configuration writes, one 16-bit word per clock.
//   res_*   result blocks for the PCIe link: 18 words of 4 x 16 bits, res_last
//           on the last, valid/ready.
//   status  counters and flags for the host.
// Timing at the defaults: a batch is 864 time slices (138240 samples). With
// no back-pressure, the first word of its result block is taken 1833 clocks
// after the batch's last sample: 2 (pre-processor) + 17 x 96 + 198 (network,
// 18 frames of 96 beats) + 1 (post-processor); 11.0 us at a 6 ns clock. The
// network accepts a new frame every 96 clocks.
//
// The split into pre-processor, network and post-processor and their sizes
// follow the published design; the host write bus and status outputs are this
// design's own. The digitizer, the host software that feeds it and the Dolphin
// PCIe link are outside this design; their signals are the ports above.
module bes_ml_top
  import snl_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // digitizer stream
  input  logic                    dig_valid,
  input  logic signed [ADC_W-1:0] dig_data,
  input  logic                    dig_last,
  // host parameter writes
  input  logic                    p_wr_en,
  input  logic [PADDR_W-1:0]      p_addr,
  input  logic [WGT_W-1:0]        p_data,
  // result blocks to the PCIe link
  output logic                    res_valid,
  input  logic                    res_ready,
  output logic [N_OUT*DATA_W-1:0] res_data,
  output logic                    res_last,
  // status
  output logic                    slice_err,
  output logic [15:0]             overflow_cnt,
  output logic [15:0]             batch_cnt,
  output logic [15:0]             blocks_sent,
  output logic [15:0]             param_wr_cnt,
  output logic [15:0]             bad_addr_cnt,
  output logic [2:0]              n_out
);

  layer_wr_t  wr_l1, wr_l2, wr_l3;
  logic [7:0] chmap [N_BES];

  logic pp_valid, pp_ready, pp_frame_last, pp_block_last;
  act_t pp_data [IN_PAR];
  logic nn_valid, nn_ready;
  act_t nn_data [N_OUT];

  snl_param_loader u_loader (
    .clk, .rst_n,
    .p_wr_en, .p_addr, .p_data,
    .wr_l1, .wr_l2, .wr_l3,
    .chmap, .n_out, .param_wr_cnt, .bad_addr_cnt
  );

  bes_preprocessor u_pre (
    .clk, .rst_n,
    .dig_valid, .dig_data, .dig_last,
    .chmap,
    .out_valid     (pp_valid), .out_ready(pp_ready), .out_data(pp_data),
    .out_frame_last(pp_frame_last), .out_block_last(pp_block_last),
    .slice_err, .overflow_cnt, .block_cnt(batch_cnt)
  );

  snl_mlp_core u_nn (
    .clk, .rst_n,
    .in_valid (pp_valid), .in_ready(pp_ready), .in_data(pp_data),
    .in_frame_last(pp_frame_last),
    .out_valid(nn_valid), .out_ready(nn_ready), .out_data(nn_data),
    .wr_l1, .wr_l2, .wr_l3
  );

  bes_postprocessor u_post (
    .clk, .rst_n,
    .n_out,
    .in_valid (nn_valid), .in_ready(nn_ready), .in_data(nn_data),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data),
    .out_last (res_last), .blocks_sent
  );

  // a batch from the pre-processor ends exactly on a frame boundary
  a_batch_frame : assert property (@(posedge clk) disable iff (!rst_n)
      (pp_valid && pp_block_last) |-> pp_frame_last);

endmodule
