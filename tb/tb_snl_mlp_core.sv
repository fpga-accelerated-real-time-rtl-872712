// tb_snl_mlp_core - self-checking test of snl_mlp_core at its full size
// (768-50-50-4, 8 inputs per clock).
//
// Random weights and biases are written straight into the three layer write
// ports. Frames of 96 beats are streamed in; each frame's four scores are
// compared with a whole-network integer model from tb_ref_pkg. The first
// frames run without gaps or back-pressure to check the timing: first result
// 198 clocks after the first beat is accepted, then one result every 96
// clocks. Later frames run with random input gaps and output back-pressure.
module tb_snl_mlp_core;
  import snl_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = 768, NH = 50, NO = 4, PAR = 8;
  localparam int FRAMES_FAST = 6, FRAMES_SLOW = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic in_valid, in_ready, in_frame_last, out_valid, out_ready;
  act_t in_data [PAR];
  act_t out_data [NO];
  layer_wr_t wr_l1, wr_l2, wr_l3;

  snl_mlp_core dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .in_frame_last,
    .out_valid, .out_ready, .out_data, .wr_l1, .wr_l2, .wr_l3);

  longint w1 [NH][NI];
  longint b1 [NH];
  longint w2 [NH][NH];
  longint b2 [NH];
  longint w3 [NO][NH];
  longint b3 [NO];
  longint x  [NI];
  longint exp_q [$];
  int t_out [$];
  int t_first_in = -1;
  int n_bp = 0;
  bit bp_on = 1'b0;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd(input int lo, input int hi);
    return longint'(lo) + longint'($urandom_range(hi - lo));
  endfunction

  task automatic ref_frame();
    longint h1 [NH];
    longint h2 [NH];
    for (int n = 0; n < NH; n++) begin
      longint s;
      s = b1[n] * 256;
      for (int i = 0; i < NI; i++) s += x[i] * w1[n][i];
      h1[n] = ref_requant(s, 1'b1);
    end
    for (int n = 0; n < NH; n++) begin
      longint s;
      s = b2[n] * 256;
      for (int i = 0; i < NH; i++) s += h1[i] * w2[n][i];
      h2[n] = ref_requant(s, 1'b1);
    end
    for (int n = 0; n < NO; n++) begin
      longint s;
      s = b3[n] * 256;
      for (int i = 0; i < NH; i++) s += h2[i] * w3[n][i];
      exp_q.push_back(ref_requant(s, 1'b0));
    end
  endtask

  task automatic wr(ref layer_wr_t p, input bit bias, input int n, input int i, input longint v);
    p.en = 1'b1; p.is_bias = bias; p.neuron = 16'(n); p.input_idx = 16'(i); p.data = wgt_t'(v);
  endtask

  task automatic load_all();
    for (int n = 0; n < NH; n++) begin
      for (int i = 0; i < NI; i++) begin
        w1[n][i] = rnd(-64, 64);
        wr(wr_l1, 1'b0, n, i, w1[n][i]);
        if (i < NH) begin
          w2[n][i] = rnd(-800, 800);
          wr(wr_l2, 1'b0, n, i, w2[n][i]);
        end
        if (i < NH && n < NO) begin
          w3[n][i] = rnd(-1200, 1200);
          wr(wr_l3, 1'b0, n, i, w3[n][i]);
        end
        @(posedge clk); #1;
        wr_l1 = '0; wr_l2 = '0; wr_l3 = '0;
      end
      b1[n] = rnd(-2000, 2000);
      b2[n] = rnd(-2000, 2000);
      wr(wr_l1, 1'b1, n, 0, b1[n]);
      wr(wr_l2, 1'b1, n, 0, b2[n]);
      if (n < NO) begin
        b3[n] = rnd(-2000, 2000);
        wr(wr_l3, 1'b1, n, 0, b3[n]);
      end
      @(posedge clk); #1;
      wr_l1 = '0; wr_l2 = '0; wr_l3 = '0;
    end
  endtask

  task automatic send_frame(input bit gaps);
    for (int i = 0; i < NI; i++) x[i] = rnd(-2000, 2000);
    ref_frame();
    for (int k = 0; k < NI / PAR; k++) begin
      if (gaps) while ($urandom_range(3) == 0) @(posedge clk);
      #1;
      in_valid = 1'b1;
      in_frame_last = (k == NI / PAR - 1);
      for (int l = 0; l < PAR; l++) in_data[l] = act_t'(x[k*PAR + l]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
      in_valid = 1'b0;
      in_frame_last = 1'b0;
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready && t_first_in < 0) t_first_in = cycle;
    if (rst_n && out_valid && !out_ready) n_bp++;
    if (rst_n && out_valid && out_ready) begin
      t_out.push_back(cycle);
      for (int n = 0; n < NO; n++) begin
        longint e;
        e = exp_q.pop_front();
        checks++;
        if (longint'(out_data[n]) != e) begin
          failures++;
          $display("FAIL output %0d: got %0d exp %0d", n, out_data[n], e);
        end
      end
    end
  end
  always @(negedge clk) out_ready <= bp_on ? ($urandom_range(4) == 0) : 1'b1;

  initial begin
    wr_l1 = '0; wr_l2 = '0; wr_l3 = '0;
    in_valid = 1'b0; in_frame_last = 1'b0;
    for (int l = 0; l < PAR; l++) in_data[l] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    load_all();
    repeat (5) @(posedge clk);

    for (int f = 0; f < FRAMES_FAST; f++) send_frame(1'b0);
    repeat (300) @(posedge clk);
    checks++;
    if (t_out.size() != FRAMES_FAST) begin
      failures++; $display("FAIL: %0d results, expected %0d", t_out.size(), FRAMES_FAST);
    end else begin
      $display("first result %0d clocks after first beat", t_out[0] - t_first_in);
      if (t_out[0] - t_first_in != 198) begin
        failures++; $display("FAIL latency %0d, expected 198", t_out[0] - t_first_in);
      end
      for (int f = 1; f < FRAMES_FAST; f++) begin
        checks++;
        if (t_out[f] - t_out[f-1] != 96) begin
          failures++; $display("FAIL interval %0d, expected 96", t_out[f] - t_out[f-1]);
        end
      end
    end

    bp_on = 1'b1;
    for (int f = 0; f < FRAMES_SLOW; f++) send_frame(1'b1);
    repeat (2000) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_bp == 0) begin
      failures++; $display("FAIL: %0d results missing, %0d back-pressure cycles", exp_q.size(), n_bp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
