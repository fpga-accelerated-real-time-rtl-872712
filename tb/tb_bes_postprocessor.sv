// tb_bes_postprocessor - self-checking test of bes_postprocessor at its full
// size (18 frames, 4 outputs).
//
// Random result vectors are offered with random gaps; the PCIe side applies
// random back-pressure. Each block must hold the 18 vectors in order, one per
// 64-bit word, outputs at and above n_out zero, res_last on word 18. Blocks
// are run with n_out = 4, 1 and 2. While a block is being sent the input must
// be held off, and the first word must be offered the clock after the 18th
// result is accepted.
module tb_bes_postprocessor;
  import snl_pkg::*;

  localparam int NF = 18, NO = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [2:0] n_out;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  act_t in_data [NO];
  logic [NO*DATA_W-1:0] out_data;
  logic [15:0] blocks_sent;

  bes_postprocessor dut (
    .clk, .rst_n, .n_out, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .out_last, .blocks_sent);

  logic [NO*DATA_W-1:0] exp_q [$];
  int word = 0, n_held = 0, t_in_last = 0, t_first = -1, n_words = 0;
  bit bp_on = 1'b0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_block(input int nout, input bit gaps);
    for (int f = 0; f < NF; f++) begin
      logic [NO*DATA_W-1:0] w;
      w = '0;
      if (gaps) while ($urandom_range(2) == 0) @(posedge clk);
      #1;
      in_valid = 1'b1;
      for (int k = 0; k < NO; k++) begin
        in_data[k] = act_t'($urandom_range(65535));
        if (k < nout) w[k*16 +: 16] = in_data[k];
      end
      exp_q.push_back(w);
      @(posedge clk);
      while (!in_ready) begin n_held++; @(posedge clk); end
      if (f == NF - 1) t_in_last = cycle;
      #1;
      in_valid = 1'b0;
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      logic [NO*DATA_W-1:0] e;
      n_words++;
      if (word == 0 && t_first < 0) t_first = cycle;
      e = exp_q.pop_front();
      checks++;
      if (out_data != e || out_last != (word == NF - 1)) begin
        failures++; $display("FAIL word %0d: got %h/%0d exp %h", word, out_data, out_last, e);
      end
      word = (word == NF - 1) ? 0 : word + 1;
    end
  end
  always @(negedge clk) out_ready <= bp_on ? ($urandom_range(2) == 0) : 1'b1;

  initial begin
    in_valid = 1'b0;
    for (int k = 0; k < NO; k++) in_data[k] = '0;
    n_out = 3'd4;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    send_block(4, 1'b0);
    repeat (3) @(posedge clk);
    checks++;
    if (t_first != t_in_last + 1) begin
      failures++; $display("FAIL: first word at %0d, last result at %0d", t_first, t_in_last);
    end
    repeat (25) @(posedge clk);
    bp_on = 1'b1;
    send_block(4, 1'b1);
    send_block(4, 1'b0);   // arrives while the previous block is still leaving
    repeat (100) @(posedge clk);
    n_out = 3'd1;
    send_block(1, 1'b1);
    repeat (100) @(posedge clk);
    n_out = 3'd2;
    send_block(2, 1'b1);
    repeat (100) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || blocks_sent != 5 || n_words != 5 * NF || n_held == 0) begin
      failures++;
      $display("FAIL: left %0d blocks %0d words %0d held %0d", exp_q.size(), blocks_sent, n_words, n_held);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
