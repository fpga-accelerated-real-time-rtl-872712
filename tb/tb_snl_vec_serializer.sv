// tb_snl_vec_serializer - self-checking test of snl_vec_serializer with a
// 12-value vector sent 3 values per beat.
//
// Random vectors are offered with random gaps and the output side applies
// random back-pressure. Every beat must carry the next three values in index
// order, out_last must mark the fourth beat, and with no gaps or
// back-pressure two vectors must stream in 8 consecutive clocks.
module tb_snl_vec_serializer;
  import snl_pkg::*;

  localparam int N = 12, P = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic in_valid, in_ready, out_valid, out_ready, out_last;
  act_t in_data [N];
  act_t out_data [P];

  snl_vec_serializer #(.N(N), .PAR(P)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .out_last);

  longint exp_q [$];
  int beat = 0, n_beats = 0, t_beats [$];
  bit bp_on = 1'b0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_vec(input bit gaps);
    if (gaps) while ($urandom_range(2) == 0) @(posedge clk);
    #1;
    for (int i = 0; i < N; i++) begin
      in_data[i] = act_t'($urandom_range(65535));
      exp_q.push_back(longint'(in_data[i]));
    end
    in_valid = 1'b1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1;
    in_valid = 1'b0;
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      n_beats++;
      t_beats.push_back(cycle);
      for (int l = 0; l < P; l++) begin
        longint e;
        e = exp_q.pop_front();
        checks++;
        if (longint'(out_data[l]) != e) begin
          failures++; $display("FAIL beat %0d lane %0d: got %0d exp %0d", beat, l, out_data[l], e);
        end
      end
      checks++;
      if (out_last != (beat == N / P - 1)) begin failures++; $display("FAIL last at beat %0d", beat); end
      beat = (beat == N / P - 1) ? 0 : beat + 1;
    end
  end
  always @(negedge clk) out_ready <= bp_on ? ($urandom_range(2) != 0) : 1'b1;

  initial begin
    in_valid = 1'b0;
    for (int i = 0; i < N; i++) in_data[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    send_vec(1'b0);
    send_vec(1'b0);
    repeat (12) @(posedge clk);
    checks++;
    if (t_beats.size() != 8 || t_beats[7] - t_beats[0] != 7) begin
      failures++; $display("FAIL: back-to-back vectors not gapless");
    end
    bp_on = 1'b1;
    for (int v = 0; v < 40; v++) send_vec(1'b1);
    repeat (200) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_beats != 42 * N / P) begin
      failures++; $display("FAIL: %0d values left, %0d beats", exp_q.size(), n_beats);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
