// tb_bes_preprocessor - self-checking test of bes_preprocessor at its full
// size: 160-channel digitizer stream in, batches of 18 frames x 768 features
// out at 8 per clock.
//
// A random table of 16 distinct digitizer channels is loaded. Two batches
// (2 x 864 time slices) of random 18-bit samples are streamed one sample per
// clock with no gaps, as the digitizer would. The expected feature stream is
// built here: for each slice, position j holds floor(code / 4) of channel
// chmap[j]. Every output beat, its frame and batch flags, the beat count per
// batch (1728) and the time from the batch's last sample to its first beat
// (2 clocks) are checked.
module tb_bes_preprocessor;
  import snl_pkg::*;
  import tb_ref_pkg::*;

  localparam int BEATS = N_FRAMES * N_FEAT / IN_PAR;
  localparam int BATCHES = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic dig_valid, dig_last;
  logic signed [ADC_W-1:0] dig_data;
  logic [7:0] chmap [N_BES];
  logic out_valid, out_ready, out_frame_last, out_block_last, slice_err;
  act_t out_data [IN_PAR];
  logic [15:0] overflow_cnt, block_cnt;

  bes_preprocessor dut (
    .clk, .rst_n, .dig_valid, .dig_data, .dig_last, .chmap,
    .out_valid, .out_ready, .out_data, .out_frame_last, .out_block_last,
    .slice_err, .overflow_cnt, .block_cnt);

  longint exp_q [$];
  longint slice_v [N_CH_IN];
  int beat = 0, n_beats = 0, t_last_sample = 0, t_first = -1;

  initial begin : watchdog
    repeat (BATCHES * N_FRAMES * N_SLICES * N_CH_IN + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      n_beats++;
      if (t_first < 0) t_first = cycle;
      for (int l = 0; l < IN_PAR; l++) begin
        longint e;
        e = exp_q.pop_front();
        checks++;
        if (longint'(out_data[l]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL beat %0d lane %0d: got %0d exp %0d", beat, l, out_data[l], e);
        end
      end
      checks++;
      if (out_frame_last != ((beat % (N_FEAT / IN_PAR)) == N_FEAT / IN_PAR - 1) ||
          out_block_last != (beat == BEATS - 1)) begin
        failures++; $display("FAIL flags at beat %0d", beat);
      end
      beat = (beat == BEATS - 1) ? 0 : beat + 1;
    end
  end

  initial begin
    bit used [N_CH_IN];
    dig_valid = 1'b0; dig_last = 1'b0; dig_data = '0; out_ready = 1'b1;
    for (int c = 0; c < N_CH_IN; c++) used[c] = 1'b0;
    for (int j = 0; j < N_BES; j++) begin
      int c;
      do c = $urandom_range(N_CH_IN - 1); while (used[c]);
      used[c] = 1'b1;
      chmap[j] = 8'(c);
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int b = 0; b < BATCHES; b++) begin
      for (int s = 0; s < N_FRAMES * N_SLICES; s++) begin
        for (int c = 0; c < N_CH_IN; c++)
          slice_v[c] = longint'($urandom_range(262143)) - 131072;
        for (int j = 0; j < N_BES; j++) exp_q.push_back(ref_adc(slice_v[chmap[j]]));
        for (int c = 0; c < N_CH_IN; c++) begin
          dig_valid = 1'b1;
          dig_data  = ADC_W'(slice_v[c]);
          dig_last  = (c == N_CH_IN - 1);
          @(posedge clk);
          #1;
        end
      end
      dig_valid = 1'b0;
      dig_last  = 1'b0;
      t_last_sample = cycle;
      if (b == 0) begin
        repeat (4) @(posedge clk);
        checks++;
        if (t_first != t_last_sample + 1) begin
          failures++; $display("FAIL: first beat at %0d, last sample at %0d", t_first, t_last_sample);
        end
        #1;
      end
    end
    repeat (BEATS + 10) @(posedge clk);
    checks++;
    if (n_beats != BATCHES * BEATS || exp_q.size() != 0 || block_cnt != BATCHES ||
        overflow_cnt != 0 || slice_err) begin
      failures++;
      $display("FAIL: beats %0d left %0d batches %0d overflow %0d err %0d", n_beats, exp_q.size(),
               block_cnt, overflow_cnt, slice_err);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
