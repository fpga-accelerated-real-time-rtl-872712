// tb_bes_frame_buffer - self-checking test of bes_frame_buffer, reduced to
// batches of 2 frames of 3 slices (16 channels, 8 features per beat).
//
// Samples are written in a random order within each slice, with random idle
// cycles, exactly as bes_channel_select would deliver them. Every output beat
// is compared with the slice-major feature order, and the frame and batch end
// flags with their expected beats. Phase 1 streams three batches with the
// output always ready (ping-pong between the banks). Phase 2 holds the output
// off while four batches arrive: the first two must be kept, the later ones
// dropped and counted as overflow, and the kept ones must come out intact
// once the output is released. The batch that starts while both banks are
// still full is dropped as well; the one after it is kept. With the output ready, a batch must start the
// clock after its last sample and stream one beat per clock.
module tb_bes_frame_buffer;
  import snl_pkg::*;

  localparam int NB = 16, NS = 3, NF = 2, P = 8;
  localparam int FEAT = NS * NB, BEATS = NF * FEAT / P;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic in_valid, in_slice_last, out_valid, out_ready, out_frame_last, out_block_last;
  act_t in_data;
  logic [3:0] in_pos;
  act_t out_data [P];
  logic [15:0] overflow_cnt, block_cnt;

  bes_frame_buffer #(.NBES(NB), .NSLICES(NS), .NFRAMES(NF), .PAR(P)) dut (
    .clk, .rst_n, .in_valid, .in_data, .in_pos, .in_slice_last,
    .out_valid, .out_ready, .out_data, .out_frame_last, .out_block_last,
    .overflow_cnt, .block_cnt);

  longint exp_q [$];     // expected features, batch after batch
  int beat_in_batch = 0;
  int n_beats = 0;
  int t_last_sample = 0, t_first_beat = -1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one batch; keep = 1 if it is expected at the output
  task automatic send_batch(input bit keep);
    longint v [NF*FEAT];
    for (int i = 0; i < NF*FEAT; i++) v[i] = longint'($urandom_range(65535)) - 32768;
    if (keep) for (int i = 0; i < NF*FEAT; i++) exp_q.push_back(v[i]);
    for (int s = 0; s < NF*NS; s++) begin
      int order [NB];
      for (int j = 0; j < NB; j++) order[j] = j;
      order.shuffle();
      for (int j = 0; j < NB; j++) begin
        while ($urandom_range(3) == 0) @(posedge clk);
        #1;
        in_valid = 1'b1;
        in_pos   = 4'(order[j]);
        in_data  = act_t'(v[s*NB + order[j]]);
        in_slice_last = (j == NB - 1);
        @(posedge clk);
        #1;
        in_valid = 1'b0;
        in_slice_last = 1'b0;
      end
    end
    t_last_sample = cycle;
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      n_beats++;
      if (t_first_beat < 0) t_first_beat = cycle;
      for (int l = 0; l < P; l++) begin
        longint e;
        e = exp_q.pop_front();
        checks++;
        if (longint'(out_data[l]) != e) begin
          failures++; $display("FAIL beat %0d lane %0d: got %0d exp %0d", beat_in_batch, l, out_data[l], e);
        end
      end
      checks++;
      if (out_frame_last != ((beat_in_batch % (FEAT/P)) == FEAT/P - 1) ||
          out_block_last != (beat_in_batch == BEATS - 1)) begin
        failures++; $display("FAIL flags at beat %0d", beat_in_batch);
      end
      beat_in_batch = (beat_in_batch == BEATS - 1) ? 0 : beat_in_batch + 1;
    end
  end

  initial begin
    in_valid = 1'b0; in_slice_last = 1'b0; in_data = '0; in_pos = '0;
    out_ready = 1'b1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // phase 1
    send_batch(1'b1);
    repeat (2) @(posedge clk);
    checks++;
    if (t_first_beat != t_last_sample) begin
      failures++; $display("FAIL: first beat at %0d, last sample at %0d", t_first_beat, t_last_sample);
    end
    send_batch(1'b1);
    send_batch(1'b1);
    repeat (BEATS + 5) @(posedge clk);
    checks++;
    if (n_beats != 3 * BEATS || overflow_cnt != 0) begin
      failures++; $display("FAIL phase 1: %0d beats, overflow %0d", n_beats, overflow_cnt);
    end
    // phase 2
    #1 out_ready = 1'b0;
    send_batch(1'b1);
    send_batch(1'b1);
    send_batch(1'b0);
    send_batch(1'b0);
    repeat (5) @(posedge clk);
    checks++;
    if (overflow_cnt != 2) begin failures++; $display("FAIL: overflow_cnt %0d, expected 2", overflow_cnt); end
    #1 out_ready = 1'b1;
    repeat (2 * BEATS + 5) @(posedge clk);
    // the batch after the dropped ones began with both banks full: dropped
    // too; after it, batches are accepted again
    send_batch(1'b0);
    checks++;
    if (overflow_cnt != 3) begin failures++; $display("FAIL: overflow_cnt %0d, expected 3", overflow_cnt); end
    send_batch(1'b1);
    repeat (BEATS + 5) @(posedge clk);
    checks++;
    if (n_beats != 6 * BEATS || exp_q.size() != 0 || block_cnt != 6) begin
      failures++; $display("FAIL phase 2: %0d beats, %0d left, %0d batches", n_beats, exp_q.size(), block_cnt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
