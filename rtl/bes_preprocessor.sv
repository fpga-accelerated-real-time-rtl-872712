// bes_preprocessor - the pre-processor: BES channel selection followed by the
// batch buffer.
//
// The full 160-channel digitizer stream enters one sample per clock.
// bes_channel_select keeps the 16 BES channels named in the run-time channel
// table and converts them to 16-bit fixed point; bes_frame_buffer arranges
// them into 18 frames of 48 time slices x 16 channels and, once a batch is
// complete, streams it out 8 features per clock (96 beats per frame, 1728 per
// batch) while the next batch fills the other bank.
//
// Interface: digitizer stream without back-pressure (in_last on channel 159),
// feature stream with valid/ready and frame/batch end flags, status counters.
// Timing: the first beat of a batch is offered two clocks after the batch's
// last digitizer sample (one in each stage).
//
// From the published design: extraction of 16 BES channels out of 160, 48 x
// 16 features per frame, 18 frames per call, 8 features per clock. The
// details of both stages are this design's own (see the two modules).
module bes_preprocessor
  import snl_pkg::*;
#(
  parameter int unsigned NCH     = N_CH_IN,
  parameter int unsigned NBES    = N_BES,
  parameter int unsigned NSLICES = N_SLICES,
  parameter int unsigned NFRAMES = N_FRAMES,
  parameter int unsigned PAR     = IN_PAR
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 dig_valid,
  input  logic signed [ADC_W-1:0] dig_data,
  input  logic                 dig_last,
  input  logic [7:0]           chmap [NBES],
  output logic                 out_valid,
  input  logic                 out_ready,
  output act_t                 out_data [PAR],
  output logic                 out_frame_last,
  output logic                 out_block_last,
  output logic                 slice_err,
  output logic [15:0]          overflow_cnt,
  output logic [15:0]          block_cnt
);

  logic                    cs_valid;
  act_t                    cs_data;
  logic [$clog2(NBES)-1:0] cs_pos;
  logic                    cs_slice_last;

  bes_channel_select #(.NCH(NCH), .NSEL(NBES), .IN_W(ADC_W)) u_sel (
    .clk, .rst_n,
    .in_valid  (dig_valid), .in_data(dig_data), .in_last(dig_last),
    .chmap     (chmap),
    .out_valid (cs_valid), .out_data(cs_data), .out_pos(cs_pos),
    .slice_last(cs_slice_last), .slice_err(slice_err)
  );

  bes_frame_buffer #(.NBES(NBES), .NSLICES(NSLICES), .NFRAMES(NFRAMES), .PAR(PAR)) u_buf (
    .clk, .rst_n,
    .in_valid      (cs_valid), .in_data(cs_data), .in_pos(cs_pos),
    .in_slice_last (cs_slice_last),
    .out_valid     (out_valid), .out_ready(out_ready), .out_data(out_data),
    .out_frame_last(out_frame_last), .out_block_last(out_block_last),
    .overflow_cnt  (overflow_cnt), .block_cnt(block_cnt)
  );

endmodule
