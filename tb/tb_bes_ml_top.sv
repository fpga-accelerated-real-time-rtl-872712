// tb_bes_ml_top - end-to-end test of bes_ml_top with every parameter at its
// default: 160-channel digitizer stream in, blocks of 18 results out.
//
// Sequence:
//   1. Load a random 4-output network (41204 words) and a random table of 16
//      BES channels over the parameter bus.
//   2. Batch 1 (864 time slices of random 18-bit samples, one per clock with
//      short idle gaps between slices as at a 1 MHz slice rate). Its block is
//      checked against the integer model, and the time from the last sample
//      to the first result word must be 1833 clocks.
//   3. Task switch: while batch 2 arrives, the output layer is reloaded with
//      new weights and n_out set to 1. Batch 2's block must match the new
//      network, with output words carrying only the first score (the other
//      three neurons still compute, from non-zero weights, and must be masked). The PCIe side
//      applies random back-pressure.
//   4. Overflow: the PCIe side stops taking results while batches 3-6 arrive.
//      Batch 3's block waits, the network stalls behind it, batches 4 and 5
//      fill the two banks and batch 6 is dropped. After release, blocks 3, 4
//      and 5 must arrive intact and in order.
//   5. A slice with a misplaced end marker must raise slice_err.
// Each mechanism (channel discard, bank ping-pong, back-pressure stall, task
// switch, overflow, ReLU clipping, slice error) is counted; one that never
// happened counts as a failure.
module tb_bes_ml_top;
  import snl_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = N_FEAT, NH = N_HID1, NO = N_OUT;
  localparam int SLICES = N_FRAMES * N_SLICES;

  logic clk = 1'b0, rst_n = 1'b0;
  always #3 clk = ~clk;   // 6 ns clock
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic dig_valid, dig_last;
  logic signed [ADC_W-1:0] dig_data;
  logic p_wr_en;
  logic [PADDR_W-1:0] p_addr;
  logic [WGT_W-1:0] p_data;
  logic res_valid, res_ready, res_last;
  logic [N_OUT*DATA_W-1:0] res_data;
  logic slice_err;
  logic [15:0] overflow_cnt, batch_cnt, blocks_sent, param_wr_cnt, bad_addr_cnt;
  logic [2:0] n_out;

  bes_ml_top dut (
    .clk, .rst_n, .dig_valid, .dig_data, .dig_last, .p_wr_en, .p_addr, .p_data,
    .res_valid, .res_ready, .res_data, .res_last,
    .slice_err, .overflow_cnt, .batch_cnt, .blocks_sent, .param_wr_cnt, .bad_addr_cnt, .n_out);

  // ---- reference network -----------------------------------------------------
  longint w1 [NH][NI];
  longint b1 [NH];
  longint w2 [NH][NH];
  longint b2 [NH];
  longint w3 [NO][NH];
  longint b3 [NO];
  int     nout_ref = NO;
  int     chmap [N_BES];
  longint feat [N_FRAMES][NI];
  longint slice_v [N_CH_IN];

  logic [N_OUT*DATA_W-1:0] exp_q [$];

  // mechanism counters
  int n_discard = 0, n_relu = 0, n_bp = 0, n_stall = 0, n_task = 0, n_words = 0;
  int t_last_sample = 0, t_first_word = -1;
  bit bp_on = 1'b0, hold_out = 1'b0;

  initial begin : watchdog
    repeat (8 * SLICES * 170 + 200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd(input int lo, input int hi);
    return longint'(lo) + longint'($urandom_range(hi - lo));
  endfunction

  task automatic pwrite(input int a, input longint d);
    #1;
    p_wr_en = 1'b1; p_addr = PADDR_W'(a); p_data = WGT_W'(d);
    @(posedge clk);
    #1;
    p_wr_en = 1'b0;
  endtask

  task automatic load_network();
    for (int n = 0; n < NH; n++)
      for (int i = 0; i < NI; i++) begin w1[n][i] = rnd(-64, 64); pwrite(L1_WBASE + n*NI + i, w1[n][i]); end
    for (int n = 0; n < NH; n++) begin b1[n] = rnd(-1500, 1500); pwrite(L1_BBASE + n, b1[n]); end
    for (int n = 0; n < NH; n++)
      for (int i = 0; i < NH; i++) begin w2[n][i] = rnd(-800, 800); pwrite(L2_WBASE + n*NH + i, w2[n][i]); end
    for (int n = 0; n < NH; n++) begin b2[n] = rnd(-1500, 1500); pwrite(L2_BBASE + n, b2[n]); end
  endtask

  task automatic load_output_layer(input int nout);
    for (int n = 0; n < NO; n++)
      for (int i = 0; i < NH; i++) begin
        w3[n][i] = rnd(-1200, 1200);
        pwrite(L3_WBASE + n*NH + i, w3[n][i]);
      end
    for (int n = 0; n < NO; n++) begin b3[n] = rnd(-1500, 1500); pwrite(L3_BBASE + n, b3[n]); end
    pwrite(CFG_NOUT, longint'(nout));
    nout_ref = nout;
  endtask

  // expected block for the frames in feat[]
  task automatic ref_block();
    for (int f = 0; f < N_FRAMES; f++) begin
      longint h1 [NH];
      longint h2 [NH];
      logic [N_OUT*DATA_W-1:0] w;
      for (int n = 0; n < NH; n++) begin
        longint s;
        s = b1[n] * 256;
        for (int i = 0; i < NI; i++) s += feat[f][i] * w1[n][i];
        if (s < 0) n_relu++;
        h1[n] = ref_requant(s, 1'b1);
      end
      for (int n = 0; n < NH; n++) begin
        longint s;
        s = b2[n] * 256;
        for (int i = 0; i < NH; i++) s += h1[i] * w2[n][i];
        h2[n] = ref_requant(s, 1'b1);
      end
      w = '0;
      for (int n = 0; n < nout_ref; n++) begin
        longint s;
        s = b3[n] * 256;
        for (int i = 0; i < NH; i++) s += h2[i] * w3[n][i];
        w[n*DATA_W +: DATA_W] = DATA_W'(ref_requant(s, 1'b0));
      end
      exp_q.push_back(w);
    end
  endtask

  // one batch of digitizer data; keep = 1 if its block is expected
  task automatic send_batch(input bit keep);
    for (int s = 0; s < SLICES; s++) begin
      for (int c = 0; c < N_CH_IN; c++) slice_v[c] = rnd(-60000, 60000);
      for (int j = 0; j < N_BES; j++)
        feat[s / N_SLICES][(s % N_SLICES) * N_BES + j] = ref_adc(slice_v[chmap[j]]);
      for (int c = 0; c < N_CH_IN; c++) begin
        dig_valid = 1'b1;
        dig_data  = ADC_W'(slice_v[c]);
        dig_last  = (c == N_CH_IN - 1);
        @(posedge clk);
        #1;
      end
      n_discard += N_CH_IN - N_BES;
      if (s == SLICES - 1) t_last_sample = cycle - 1;   // clock that took the last sample
      dig_valid = 1'b0;
      dig_last  = 1'b0;
      repeat ($urandom_range(6)) @(posedge clk);
      #1;
    end
    if (keep) ref_block();
  endtask

  // ---- result checker ----------------------------------------------------------
  int word = 0;
  always @(posedge clk) begin
    if (rst_n && res_valid && !res_ready) n_bp++;
    if (rst_n && dut.pp_valid && !dut.pp_ready) n_stall++;
    if (rst_n && res_valid && res_ready) begin
      logic [N_OUT*DATA_W-1:0] e;
      n_words++;
      if (t_first_word < 0) t_first_word = cycle;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected result word");
      end else begin
        e = exp_q.pop_front();
        if (res_data !== e || res_last != (word == N_FRAMES - 1)) begin
          failures++;
          if (failures < 20) $display("FAIL word %0d: got %h last %0d exp %h", word, res_data, res_last, e);
        end
      end
      word = (word == N_FRAMES - 1) ? 0 : word + 1;
    end
  end
  always @(negedge clk) res_ready <= hold_out ? 1'b0 : bp_on ? ($urandom_range(3) != 0) : 1'b1;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    bit used [N_CH_IN];
    dig_valid = 1'b0; dig_last = 1'b0; dig_data = '0;
    p_wr_en = 1'b0; p_addr = '0; p_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. parameters and channel table
    for (int c = 0; c < N_CH_IN; c++) used[c] = 1'b0;
    for (int j = 0; j < N_BES; j++) begin
      int c;
      do c = $urandom_range(N_CH_IN - 1); while (used[c]);
      used[c] = 1'b1;
      chmap[j] = c;
      pwrite(CFG_CHMAP + j, longint'(c));
    end
    load_network();
    load_output_layer(4);
    repeat (3) @(posedge clk);
    chk(int'(param_wr_cnt) == N_PARAMS, $sformatf("param_wr_cnt %0d", param_wr_cnt));
    chk(n_out == 3'd4, "n_out after load");

    // 2. batch 1
    #1;
    send_batch(1'b1);
    repeat (2000) @(posedge clk);
    chk(n_words == N_FRAMES, $sformatf("batch 1: %0d words", n_words));
    $display("batch 1: first result word %0d clocks after the last sample", t_first_word - t_last_sample);
    chk(t_first_word - t_last_sample == 1833,
        $sformatf("latency %0d, expected 1833", t_first_word - t_last_sample));

    // 3. task switch while batch 2 arrives
    #1;
    bp_on = 1'b1;
    fork
      send_batch(1'b1);
      begin
        repeat (1000) @(posedge clk);
        load_output_layer(1);
        n_task++;
      end
    join
    repeat (3000) @(posedge clk);
    chk(n_out == 3'd1, "n_out after task switch");
    chk(n_words == 2 * N_FRAMES, $sformatf("batch 2: %0d words", n_words));

    // 4. overflow
    #1;
    hold_out = 1'b1;
    send_batch(1'b1);
    send_batch(1'b1);
    send_batch(1'b1);
    send_batch(1'b0);
    chk(overflow_cnt == 1, $sformatf("overflow_cnt %0d, expected 1", overflow_cnt));
    chk(n_words == 2 * N_FRAMES, $sformatf("words while held: %0d", n_words));
    #1;
    hold_out = 1'b0;
    repeat (3 * 2000 + 3 * 1728) @(posedge clk);
    chk(n_words == 5 * N_FRAMES && exp_q.size() == 0,
        $sformatf("after release: %0d words, %0d expected words left", n_words, exp_q.size()));
    chk(int'(blocks_sent) == 5 && int'(batch_cnt) == 5, $sformatf("blocks %0d batches %0d", blocks_sent, batch_cnt));

    // 5. slice error
    chk(!slice_err, "slice_err before the bad slice");
    #1;
    for (int c = 0; c < 50; c++) begin
      dig_valid = 1'b1; dig_data = '0; dig_last = (c == 49);
      @(posedge clk);
      #1;
    end
    dig_valid = 1'b0; dig_last = 1'b0;
    repeat (3) @(posedge clk);
    chk(slice_err, "slice_err after the bad slice");
    chk(bad_addr_cnt == 0, "no bad addresses");

    $display("mechanisms: discarded %0d relu %0d backpressure %0d stalls %0d task switches %0d overflow %0d batches %0d",
             n_discard, n_relu, n_bp, n_stall, n_task, overflow_cnt, batch_cnt);
    chk(n_discard > 0 && n_relu > 0 && n_bp > 0 && n_stall > 0 && n_task > 0 &&
        overflow_cnt > 0 && batch_cnt > 1, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
