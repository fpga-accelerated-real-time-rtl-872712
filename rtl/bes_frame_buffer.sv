// bes_frame_buffer - second stage of the pre-processor: assembles batches of
// frames and bursts them to the network at IN_PAR features per clock.
//
// A frame is NSLICES consecutive time slices of NBES kept channels, laid out
// slice-major (feature index = slice * NBES + BES position), which is the
// network's input ordering. NFRAMES consecutive, non-overlapping frames form
// one batch. The buffer has two banks of one batch each. Samples from
// bes_channel_select are written one at a time into the bank being filled,
// at row (slice * NBES + pos) / IN_PAR, lane pos % IN_PAR; slice_last
// advances the slice counter. When a batch is complete its bank becomes full
// and filling moves to the other bank (ping-pong). A full bank is read out row
// by row, one row of IN_PAR features per accepted beat, and is freed after its
// last row.
//
// Overflow: if the bank to be filled next is still waiting to be read when a
// new batch starts, that whole batch is dropped (the slice counter keeps
// counting so batches stay aligned); overflow_cnt counts dropped batches as
// they end. Whether to keep or drop is decided only at batch boundaries, so a
// batch that starts while both banks are full is dropped even if a bank frees
// up during it.
//
// Interface: input side has no back-pressure; output side is valid/ready, with
// out_frame_last on the last beat of each frame and out_block_last on the last
// beat of the batch. Timing: the read is combinational from the bank, so the
// first beat of a batch is offered the clock after the batch's last slice is
// written, and a batch takes NFRAMES*NSLICES*NBES/IN_PAR beats to stream
// (1728 at the defaults) when out_ready stays high.
//
// From the published design: 48 slices x 16 channels per frame, 18 frames
// per call, 8 features per clock, the batch handed to the network in one go.
// This design's own choices: non-overlapping frames, the slice-major feature
// order, two banks, and dropping a whole batch on overflow.
module bes_frame_buffer
  import snl_pkg::*;
#(
  parameter int unsigned NBES    = N_BES,
  parameter int unsigned NSLICES = N_SLICES,
  parameter int unsigned NFRAMES = N_FRAMES,
  parameter int unsigned PAR     = IN_PAR
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // kept samples from bes_channel_select
  input  logic                     in_valid,
  input  act_t                     in_data,
  input  logic [$clog2(NBES)-1:0]  in_pos,
  input  logic                     in_slice_last,
  // feature stream to the network
  output logic                     out_valid,
  input  logic                     out_ready,
  output act_t                     out_data [PAR],
  output logic                     out_frame_last,
  output logic                     out_block_last,
  // status
  output logic [15:0]              overflow_cnt,
  output logic [15:0]              block_cnt
);

  localparam int unsigned ROW_PER_SLICE = NBES / PAR;
  localparam int unsigned ROW_PER_FRAME = NSLICES * ROW_PER_SLICE;
  localparam int unsigned ROWS          = NFRAMES * ROW_PER_FRAME;
  localparam int unsigned SLICES        = NFRAMES * NSLICES;
  localparam int unsigned RW            = $clog2(ROWS);
  localparam int unsigned SW            = $clog2(SLICES);

  act_t mem [2*ROWS][PAR];

  // ---- fill side -----------------------------------------------------------
  logic          wbank;
  logic [SW-1:0] slice_idx;
  logic          dropping;
  logic [1:0]    full;

  logic [RW:0]   wr_row;
  always_comb begin
    wr_row = (RW+1)'(32'(wbank) * ROWS + 32'(slice_idx) * ROW_PER_SLICE
                     + 32'(in_pos) / PAR);
  end

  always_ff @(posedge clk) begin
    if (in_valid && !dropping)
      mem[wr_row][32'(in_pos) % PAR] <= in_data;
  end

  // ---- drain side -----------------------------------------------------------
  logic          rbank;
  logic [RW-1:0] rd_row;

  assign out_valid      = full[rbank];
  assign out_frame_last = (32'(rd_row) % ROW_PER_FRAME) == ROW_PER_FRAME - 1;
  assign out_block_last = 32'(rd_row) == ROWS - 1;

  always_comb begin
    for (int l = 0; l < PAR; l++)
      out_data[l] = mem[32'(rbank) * ROWS + 32'(rd_row)][l];
  end

  logic batch_end;
  assign batch_end = in_slice_last && (32'(slice_idx) == SLICES - 1);

  // bank occupancy after this clock's drain and fill
  logic       drain_done;
  logic [1:0] full_n;
  always_comb begin
    drain_done = out_valid && out_ready && out_block_last;
    full_n     = full;
    if (drain_done)              full_n[rbank] = 1'b0;
    if (batch_end && !dropping)  full_n[wbank] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank        <= 1'b0;
      slice_idx    <= '0;
      dropping     <= 1'b0;
      full         <= '0;
      rbank        <= 1'b0;
      rd_row       <= '0;
      overflow_cnt <= '0;
      block_cnt    <= '0;
    end else begin
      full <= full_n;
      // drain
      if (out_valid && out_ready) begin
        if (out_block_last) begin
          rd_row <= '0;
          rbank  <= ~rbank;
        end else begin
          rd_row <= rd_row + 1'b1;
        end
      end
      // fill: at the end of a batch, the next one goes to the other bank if
      // it is free (counting a drain that finishes this very clock),
      // otherwise it is dropped
      if (in_slice_last) begin
        if (batch_end) begin
          slice_idx <= '0;
          if (!dropping) begin
            block_cnt <= block_cnt + 1'b1;
            wbank     <= ~wbank;
            if (full_n[~wbank]) dropping <= 1'b1;
          end else begin
            overflow_cnt <= overflow_cnt + 1'b1;
            if (!full_n[wbank]) dropping <= 1'b0;
          end
        end else begin
          slice_idx <= slice_idx + 1'b1;
        end
      end
    end
  end

  // the drain never overtakes the fill: only full banks are read
  a_read_full : assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid |-> full[rbank]);
  // fill and drain never use the same bank at once
  a_bank_excl : assert property (@(posedge clk) disable iff (!rst_n)
                                 (in_valid && !dropping) |-> !full[wbank]);

endmodule
