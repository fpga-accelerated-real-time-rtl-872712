// tb_snl_param_loader - self-checking test of snl_param_loader.
//
// Writes random words to random addresses in every region of the map (the
// weights and biases of each layer, the channel table, the output count and
// unused addresses). For each write, the decoded layer write one clock later
// must name the right layer, bias flag, neuron and input, worked out here from
// the layer sizes 768-50-50-4; configuration writes must land in the right
// register, out-of-range output counts must be clamped to 1..4, and unused
// addresses must only be counted.
module tb_snl_param_loader;
  import snl_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic p_wr_en;
  logic [PADDR_W-1:0] p_addr;
  logic [WGT_W-1:0] p_data;
  layer_wr_t wr_l1, wr_l2, wr_l3;
  logic [7:0] chmap [N_BES];
  logic [2:0] n_out;
  logic [15:0] param_wr_cnt, bad_addr_cnt;

  snl_param_loader dut (
    .clk, .rst_n, .p_wr_en, .p_addr, .p_data, .wr_l1, .wr_l2, .wr_l3,
    .chmap, .n_out, .param_wr_cnt, .bad_addr_cnt);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected decode of one address: layer (1..3, 0 none), bias, neuron, input
  task automatic expect_decode(input int a, output int layer, output bit bias,
                               output int n, output int i);
    layer = 0; bias = 0; n = 0; i = 0;
    if (a < 768*50)                      begin layer = 1; n = a / 768; i = a % 768; end
    else if (a < 768*50 + 50)            begin layer = 1; bias = 1; n = a - 768*50; end
    else if (a < 768*50 + 50 + 2500)     begin layer = 2; n = (a - 38450) / 50; i = (a - 38450) % 50; end
    else if (a < 40950 + 50)             begin layer = 2; bias = 1; n = a - 40950; end
    else if (a < 41000 + 200)            begin layer = 3; n = (a - 41000) / 50; i = (a - 41000) % 50; end
    else if (a < 41204)                  begin layer = 3; bias = 1; n = a - 41200; end
  endtask

  task automatic do_write(input int a, input int d);
    int layer, n, i;
    bit bias;
    layer_wr_t got;
    expect_decode(a, layer, bias, n, i);
    #1;
    p_wr_en = 1'b1; p_addr = PADDR_W'(a); p_data = WGT_W'(d);
    @(posedge clk);
    #1;
    p_wr_en = 1'b0;
    chk((wr_l1.en == (layer == 1)) && (wr_l2.en == (layer == 2)) && (wr_l3.en == (layer == 3)),
        $sformatf("layer select for address %0d", a));
    got = (layer == 1) ? wr_l1 : (layer == 2) ? wr_l2 : wr_l3;
    if (layer != 0)
      chk(got.is_bias == bias && int'(got.neuron) == n && (bias || int'(got.input_idx) == i) &&
          got.data == wgt_t'(d),
          $sformatf("decode of address %0d: bias %0d neuron %0d input %0d", a, got.is_bias,
                    got.neuron, got.input_idx));
  endtask

  int edges [14] = '{0, 767, 768, 38399, 38400, 38449, 38450, 40949, 40950, 40999,
                     41000, 41199, 41200, 41203};
  int nparam = 0, nbad = 0;

  initial begin
    p_wr_en = 1'b0; p_addr = '0; p_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    chk(n_out == 3'd4 && chmap[5] == 8'd5, "reset values");
    // region edges and random addresses
    for (int k = 0; k < 14; k++) begin
      do_write(edges[k], int'($urandom_range(65535)));
      nparam++;
    end
    for (int r = 0; r < 300; r++) begin
      do_write(int'($urandom_range(41203)), int'($urandom_range(65535)));
      nparam++;
    end
    // unused addresses
    do_write(41204, 1); do_write(60000, 2); do_write(65536 + 17, 3);
    nbad = 3;
    // configuration
    for (int j = 0; j < N_BES; j++) do_write(65536 + j, 100 + j);
    @(posedge clk);
    for (int j = 0; j < N_BES; j++) chk(chmap[j] == 8'(100 + j), "channel table");
    do_write(65536 + 16, 2); @(posedge clk); chk(n_out == 3'd2, "n_out = 2");
    do_write(65536 + 16, 0); @(posedge clk); chk(n_out == 3'd1, "n_out clamp low");
    do_write(65536 + 16, 9); @(posedge clk); chk(n_out == 3'd4, "n_out clamp high");
    do_write(65536 + 16, 1); @(posedge clk); chk(n_out == 3'd1, "n_out = 1");
    chk(int'(param_wr_cnt) == nparam, $sformatf("param_wr_cnt %0d exp %0d", param_wr_cnt, nparam));
    chk(int'(bad_addr_cnt) == nbad, $sformatf("bad_addr_cnt %0d exp %0d", bad_addr_cnt, nbad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
