// tb_snl_dense_layer - self-checking test of snl_dense_layer.
//
// Two small layers run side by side: 24 inputs x 5 neurons at 4 inputs per
// clock with ReLU, and 10 inputs x 3 neurons at 1 input per clock without.
// Random weights and biases are written through the write port, then random
// frames are streamed with random input gaps and random output back-pressure.
// Each output vector is compared with tb_ref_pkg's integer model, including
// negative sums (ReLU), saturated sums, and a reload of one layer's weights
// between frames. With no gaps and no back-pressure, the result must appear
// exactly NIN/PAR clocks after the first beat is accepted.
module tb_snl_dense_layer;
  import snl_pkg::*;
  import tb_ref_pkg::*;

  localparam int NIN_A = 24, NOUT_A = 5, PAR_A = 4;
  localparam int NIN_B = 10, NOUT_B = 3, PAR_B = 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // layer A
  logic a_in_valid, a_in_ready, a_out_valid, a_out_ready;
  act_t a_in [PAR_A];
  act_t a_out [NOUT_A];
  layer_wr_t a_wr;
  snl_dense_layer #(.NIN(NIN_A), .NOUT(NOUT_A), .PAR(PAR_A), .RELU(1'b1)) dut_a (
    .clk, .rst_n, .in_valid(a_in_valid), .in_ready(a_in_ready), .in_data(a_in),
    .out_valid(a_out_valid), .out_ready(a_out_ready), .out_data(a_out), .wr(a_wr));

  // layer B
  logic b_in_valid, b_in_ready, b_out_valid, b_out_ready;
  act_t b_in [PAR_B];
  act_t b_out [NOUT_B];
  layer_wr_t b_wr;
  snl_dense_layer #(.NIN(NIN_B), .NOUT(NOUT_B), .PAR(PAR_B), .RELU(1'b0)) dut_b (
    .clk, .rst_n, .in_valid(b_in_valid), .in_ready(b_in_ready), .in_data(b_in),
    .out_valid(b_out_valid), .out_ready(b_out_ready), .out_data(b_out), .wr(b_wr));

  longint wa [NOUT_A][NIN_A];
  longint ba [NOUT_A];
  longint wb [NOUT_B][NIN_B];
  longint bb [NOUT_B];
  longint xa [NIN_A];
  longint xb [NIN_B];

  // expected outputs, one entry per frame
  longint exp_a [$];
  longint exp_b [$];
  int t_first_in = -1, t_first_out = -1;
  int n_relu_clip = 0, n_sat = 0, n_stall = 0;

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd(input int lo, input int hi);
    return longint'(lo) + longint'($urandom_range(hi - lo));
  endfunction

  task automatic write_a(input bit bias, input int n, input int i, input longint v);
    a_wr.en = 1'b1; a_wr.is_bias = bias; a_wr.neuron = 16'(n); a_wr.input_idx = 16'(i);
    a_wr.data = wgt_t'(v);
    @(posedge clk); #1;
    a_wr = '0;
  endtask
  task automatic write_b(input bit bias, input int n, input int i, input longint v);
    b_wr.en = 1'b1; b_wr.is_bias = bias; b_wr.neuron = 16'(n); b_wr.input_idx = 16'(i);
    b_wr.data = wgt_t'(v);
    @(posedge clk); #1;
    b_wr = '0;
  endtask

  task automatic load_a(input int wmax);
    for (int n = 0; n < NOUT_A; n++) begin
      for (int i = 0; i < NIN_A; i++) begin
        wa[n][i] = rnd(-wmax, wmax);
        write_a(1'b0, n, i, wa[n][i]);
      end
      ba[n] = rnd(-4000, 4000);
      write_a(1'b1, n, 0, ba[n]);
    end
  endtask
  task automatic load_b();
    for (int n = 0; n < NOUT_B; n++) begin
      for (int i = 0; i < NIN_B; i++) begin
        wb[n][i] = rnd(-4096, 4096);
        write_b(1'b0, n, i, wb[n][i]);
      end
      bb[n] = rnd(-4000, 4000);
      write_b(1'b1, n, 0, bb[n]);
    end
  endtask

  // send one frame to layer A; gaps: random idle cycles between beats
  task automatic send_a(input int amin, input int amax, input bit gaps);
    for (int i = 0; i < NIN_A; i++) xa[i] = rnd(amin, amax);
    for (int n = 0; n < NOUT_A; n++) begin
      longint s, e;
      s = ba[n] * 256;
      for (int i = 0; i < NIN_A; i++) s += xa[i] * wa[n][i];
      e = ref_requant(s, 1'b1);
      if (s < 0) n_relu_clip++;
      if (e == 32767) n_sat++;
      exp_a.push_back(e);
    end
    for (int k = 0; k < NIN_A / PAR_A; k++) begin
      if (gaps) while ($urandom_range(2) == 0) @(posedge clk);
      #1;
      a_in_valid = 1'b1;
      for (int l = 0; l < PAR_A; l++) a_in[l] = act_t'(xa[k*PAR_A + l]);
      @(posedge clk);
      while (!a_in_ready) begin n_stall++; @(posedge clk); end
      #1;
      a_in_valid = 1'b0;
    end
  endtask

  task automatic send_b(input bit gaps);
    for (int i = 0; i < NIN_B; i++) xb[i] = rnd(-3000, 3000);
    for (int n = 0; n < NOUT_B; n++) begin
      longint s;
      s = bb[n] * 256;
      for (int i = 0; i < NIN_B; i++) s += xb[i] * wb[n][i];
      exp_b.push_back(ref_requant(s, 1'b0));
    end
    for (int k = 0; k < NIN_B; k++) begin
      if (gaps) while ($urandom_range(2) == 0) @(posedge clk);
      #1;
      b_in_valid = 1'b1;
      b_in[0] = act_t'(xb[k]);
      @(posedge clk);
      while (!b_in_ready) @(posedge clk);
      #1;
      b_in_valid = 1'b0;
    end
  endtask

  // output checkers
  bit bp_on = 1'b0;
  always @(posedge clk) begin
    if (rst_n && a_in_valid && a_in_ready && t_first_in < 0) t_first_in = cycle;
    if (rst_n && a_out_valid && a_out_ready) begin
      if (exp_a.size() == 0) begin
        failures++; $display("FAIL A: unexpected output");
      end else begin
        if (t_first_out < 0) t_first_out = cycle;
        for (int n = 0; n < NOUT_A; n++) begin
          longint e;
          e = exp_a.pop_front();
          checks++;
          if (longint'(a_out[n]) != e) begin
            failures++;
            $display("FAIL A neuron %0d: got %0d exp %0d", n, a_out[n], e);
          end
        end
      end
    end
    if (rst_n && b_out_valid && b_out_ready) begin
      if (exp_b.size() == 0) begin
        failures++; $display("FAIL B: unexpected output");
      end else begin
        for (int n = 0; n < NOUT_B; n++) begin
          longint e;
          e = exp_b.pop_front();
          checks++;
          if (longint'(b_out[n]) != e) begin
            failures++;
            $display("FAIL B neuron %0d: got %0d exp %0d", n, b_out[n], e);
          end
        end
      end
    end
  end
  always @(negedge clk) begin
    a_out_ready <= bp_on ? ($urandom_range(3) == 0) : 1'b1;
    b_out_ready <= bp_on ? ($urandom_range(3) == 0) : 1'b1;
  end

  initial begin
    a_wr = '0; b_wr = '0;
    a_in_valid = 1'b0; b_in_valid = 1'b0;
    for (int l = 0; l < PAR_A; l++) a_in[l] = '0;
    b_in[0] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    load_a(300);
    load_b();

    // latency: no gaps, no back-pressure
    send_a(-2000, 2000, 1'b0);
    repeat (3) @(posedge clk);
    checks++;
    if (t_first_out - t_first_in != NIN_A / PAR_A) begin
      failures++;
      $display("FAIL latency: %0d clocks, expected %0d", t_first_out - t_first_in, NIN_A / PAR_A);
    end

    // random traffic with gaps and back-pressure
    bp_on = 1'b1;
    fork
      for (int f = 0; f < 30; f++) send_a(-3000, 3000, 1'b1);
      for (int f = 0; f < 30; f++) send_b(1'b1);
    join
    // large inputs and weights to drive saturation
    for (int f = 0; f < 10; f++) send_a(20000, 32767, 1'b0);
    repeat (50) @(posedge clk);
    bp_on = 1'b0;
    repeat (20) @(posedge clk);
    // reload A with new weights and run again
    load_a(4096);
    for (int f = 0; f < 10; f++) send_a(-3000, 3000, 1'b1);
    for (int f = 0; f < 10; f++) send_a(20000, 32767, 1'b0);
    repeat (40) @(posedge clk);

    checks++;
    if (exp_a.size() != 0 || exp_b.size() != 0) begin
      failures++; $display("FAIL: %0d/%0d outputs missing", exp_a.size(), exp_b.size());
    end
    checks++;
    if (n_relu_clip == 0 || n_sat == 0 || n_stall == 0) begin
      failures++;
      $display("FAIL coverage: relu=%0d sat=%0d stall=%0d", n_relu_clip, n_sat, n_stall);
    end
    $display("relu clips=%0d saturations=%0d input stalls=%0d", n_relu_clip, n_sat, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
