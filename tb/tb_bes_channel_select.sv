// tb_bes_channel_select - self-checking test of bes_channel_select at its full
// size (160 digitizer channels, 16 kept).
//
// A random table of 16 distinct channels is applied and random time slices
// are streamed with random idle cycles. Each kept sample must come out one
// clock later with its table position and the value floor(code / 4); the
// number of kept samples and slice_last pulses are counted. The table is then
// changed at run time and the test repeated. Finally a slice with in_last on
// the wrong channel must set slice_err.
module tb_bes_channel_select;
  import snl_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic in_valid, in_last;
  logic signed [ADC_W-1:0] in_data;
  logic [7:0] chmap [N_BES];
  logic out_valid, slice_last, slice_err;
  act_t out_data;
  logic [3:0] out_pos;

  bes_channel_select dut (
    .clk, .rst_n, .in_valid, .in_data, .in_last, .chmap,
    .out_valid, .out_data, .out_pos, .slice_last, .slice_err);

  longint exp_val [$];
  int     exp_pos [$];
  int     n_kept = 0, n_slices = 0, n_exp_slices = 0;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic new_table();
    bit used [N_CH_IN];
    for (int c = 0; c < N_CH_IN; c++) used[c] = 1'b0;
    for (int j = 0; j < N_BES; j++) begin
      int c;
      do c = $urandom_range(N_CH_IN - 1); while (used[c]);
      used[c] = 1'b1;
      chmap[j] = 8'(c);
    end
  endtask

  task automatic send_slice(input int last_at);
    for (int c = 0; c < N_CH_IN; c++) begin
      longint code;
      while ($urandom_range(4) == 0) @(posedge clk);
      code = longint'($urandom_range(262143)) - 131072;
      for (int j = 0; j < N_BES; j++)
        if (32'(chmap[j]) == c) begin
          exp_val.push_back(ref_adc(code));
          exp_pos.push_back(j);
        end
      #1;
      in_valid = 1'b1;
      in_data  = ADC_W'(code);
      in_last  = (c == last_at);
      @(posedge clk);
      #1;
      in_valid = 1'b0;
      in_last  = 1'b0;
    end
    n_exp_slices++;
  endtask

  always @(posedge clk) begin
    if (rst_n && slice_last) n_slices++;
    if (rst_n && out_valid) begin
      longint e;
      int p;
      n_kept++;
      checks++;
      if (exp_val.size() == 0) begin
        failures++; $display("FAIL: unexpected sample");
      end else begin
        e = exp_val.pop_front();
        p = exp_pos.pop_front();
        if (longint'(out_data) != e || int'(out_pos) != p) begin
          failures++;
          $display("FAIL: got %0d@%0d exp %0d@%0d", out_data, out_pos, e, p);
        end
      end
    end
  end

  initial begin
    in_valid = 1'b0; in_last = 1'b0; in_data = '0;
    new_table();
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int s = 0; s < 6; s++) send_slice(N_CH_IN - 1);
    new_table();
    for (int s = 0; s < 6; s++) send_slice(N_CH_IN - 1);
    repeat (5) @(posedge clk);
    checks++;
    if (n_kept != 12 * N_BES || n_slices != n_exp_slices || exp_val.size() != 0) begin
      failures++;
      $display("FAIL: kept %0d slices %0d/%0d left %0d", n_kept, n_slices, n_exp_slices, exp_val.size());
    end
    checks++;
    if (slice_err) begin failures++; $display("FAIL: slice_err set on good slices"); end
    // in_last too early: must flag an error
    chmap[0] = 8'd200;   // keep nothing from channel table entry 0
    exp_val.delete(); exp_pos.delete();
    for (int j = 0; j < N_BES; j++) chmap[j] = 8'd255;
    send_slice(100);
    repeat (3) @(posedge clk);
    checks++;
    if (!slice_err) begin failures++; $display("FAIL: slice_err not set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
