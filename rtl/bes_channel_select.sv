// bes_channel_select - first stage of the pre-processor: picks the BES channels
// out of the full digitizer stream.
//
// The digitizer delivers one time slice every microsecond as N_CH_IN samples
// (ECE, BES and CO2 interferometer channels), sent here one sample per clock
// in channel order, in_last marking the last channel of a slice. A counter
// tracks the channel number. A run-time table, chmap, names the digitizer
// channel that feeds each of the N_BES feature positions; a sample whose channel
// is in the table is passed on with its position, every other sample is
// dropped. The 18-bit ADC code is turned into a signed 16-bit activation
// (8 fraction bits) by an arithmetic shift right by ADC_W-DATA_W, so one unit
// of the activation is 1024 ADC codes.
//
// Timing: one register stage; out_* follow in_* by one clock. slice_last
// pulses with the output cycle of the last channel of each slice, whether or
// not that channel is kept. There is no back-pressure: the digitizer cannot
// be stalled. slice_err is set (sticky until reset) when in_last does not
// come on channel N_CH_IN-1; the counter then restarts at the next sample.
//
// From the published design: 160 input channels, 16 BES channels kept, the
// other signals discarded, 18-bit samples. This design's own choices: one
// sample per clock (160 samples per microsecond fit a 6 ns clock), the
// run-time channel table, the conversion to fixed point and the error flag.
module bes_channel_select
  import snl_pkg::*;
#(
  parameter int unsigned NCH   = N_CH_IN,
  parameter int unsigned NSEL  = N_BES,
  parameter int unsigned IN_W  = ADC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // digitizer stream
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_data,
  input  logic                     in_last,
  // run-time channel table: digitizer channel of each BES position
  input  logic [7:0]               chmap [NSEL],
  // kept samples
  output logic                     out_valid,
  output act_t                     out_data,
  output logic [$clog2(NSEL)-1:0]  out_pos,
  output logic                     slice_last,
  output logic                     slice_err
);

  localparam int unsigned CW = $clog2(NCH);

  logic [CW-1:0]             ch_cnt;
  logic                      hit;
  logic [$clog2(NSEL)-1:0]   hit_pos;

  // position lookup: lowest table entry naming the current channel
  always_comb begin
    hit     = 1'b0;
    hit_pos = '0;
    for (int j = NSEL - 1; j >= 0; j--) begin
      if (32'(chmap[j]) == 32'(ch_cnt)) begin
        hit     = 1'b1;
        hit_pos = j[$clog2(NSEL)-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch_cnt     <= '0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_pos    <= '0;
      slice_last <= 1'b0;
      slice_err  <= 1'b0;
    end else begin
      out_valid  <= in_valid && hit;
      slice_last <= in_valid && in_last;
      if (in_valid) begin
        out_data <= act_t'(in_data >>> (IN_W - DATA_W));
        out_pos  <= hit_pos;
        if (in_last) begin
          ch_cnt <= '0;
          if (32'(ch_cnt) != NCH - 1) slice_err <= 1'b1;
        end else if (32'(ch_cnt) == NCH - 1) begin
          ch_cnt    <= '0;
          slice_err <= 1'b1;
        end else begin
          ch_cnt <= ch_cnt + 1'b1;
        end
      end
    end
  end

endmodule
