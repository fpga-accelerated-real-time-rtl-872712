// bes_postprocessor - gathers the network's results for a whole batch and
// hands them to the PCIe side as one block.
//
// Each of the NFRAMES frames of a batch gives one vector of NO output values.
// The post-processor stores them in order; when the last frame of the batch
// has arrived it sends the block: one 64-bit word per frame, output k of the
// frame in bits [16k+15:16k], outputs at and above n_out (the number the
// current task uses) forced to zero, out_last on the final word. While a
// block is being sent no new result is accepted (in_ready low), so
// back-pressure from the PCIe side reaches the network.
//
// Interface: valid/ready in and out. Timing: the first word of a block is
// offered the clock after the last frame's result is accepted; a block is
// NFRAMES words long.
//
// From the published design: results of all 18 frames are aggregated, scalar
// or multi-class, and sent as one block to the Dolphin PCIe link. This
// design's own choices: the word layout, zeroing unused outputs, and the
// single result buffer.
module bes_postprocessor
  import snl_pkg::*;
#(
  parameter int unsigned NFRAMES = N_FRAMES,
  parameter int unsigned NO      = N_OUT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [2:0]            n_out,
  // results from the network
  input  logic                  in_valid,
  output logic                  in_ready,
  input  act_t                  in_data [NO],
  // block to the PCIe side
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [NO*DATA_W-1:0]  out_data,
  output logic                  out_last,
  output logic [15:0]           blocks_sent
);

  localparam int unsigned FW = $clog2(NFRAMES);

  logic [NO*DATA_W-1:0] buf_q [NFRAMES];
  logic [FW-1:0]        wr_idx;
  logic [FW-1:0]        rd_idx;
  logic                 sending;

  logic [NO*DATA_W-1:0] packed_in;
  always_comb begin
    for (int k = 0; k < NO; k++)
      packed_in[k*DATA_W +: DATA_W] = (k < 32'(n_out)) ? in_data[k] : '0;
  end

  assign in_ready  = !sending;
  assign out_valid = sending;
  assign out_data  = buf_q[rd_idx];
  assign out_last  = 32'(rd_idx) == NFRAMES - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_idx      <= '0;
      rd_idx      <= '0;
      sending     <= 1'b0;
      blocks_sent <= '0;
      for (int f = 0; f < NFRAMES; f++) buf_q[f] <= '0;
    end else begin
      if (in_valid && in_ready) begin
        buf_q[wr_idx] <= packed_in;
        if (32'(wr_idx) == NFRAMES - 1) begin
          wr_idx  <= '0;
          sending <= 1'b1;
        end else begin
          wr_idx <= wr_idx + 1'b1;
        end
      end
      if (out_valid && out_ready) begin
        if (out_last) begin
          rd_idx      <= '0;
          sending     <= 1'b0;
          blocks_sent <= blocks_sent + 1'b1;
        end else begin
          rd_idx <= rd_idx + 1'b1;
        end
      end
    end
  end

endmodule
