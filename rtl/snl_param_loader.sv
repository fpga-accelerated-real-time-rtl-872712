// snl_param_loader - run-time loading of network parameters and configuration.
//
// The host writes one 16-bit word per clock to a flat word address (map in
// snl_pkg). Addresses below N_PARAMS are network parameters: each layer's
// weights, numbered neuron-major (base + neuron * fan_in + input), followed by
// its biases. The loader works out which layer a word belongs to and its
// (neuron, input) position and issues the write on that layer's write port.
// Addresses from CFG_BASE up are configuration registers: CFG_CHMAP+j sets
// the digitizer channel feeding BES position j (low 8 bits), CFG_NOUT sets how
// many output neurons the current task uses (1 to 4; other values are
// clamped). Writes to unused addresses are ignored and counted in bad_addr_cnt.
//
// Reloading a different parameter set and output count is how one fixed
// network switches between tasks, e.g. 4-class confinement-regime
// classification and binary ELM detection.
//
// Timing: the decoded write reaches the layer one clock after the bus write;
// the layer stores it on the clock after that. Configuration registers update
// one clock after the write. After reset the channel table is 0..15 and four
// outputs are active.
//
// From the published design: weights and biases reloaded at run time without
// rebuilding the hardware, an output layer of 1 to 4 neurons chosen per task.
// This design's own choices: the address map, the one-word write bus, the
// configuration registers and their reset values.
module snl_param_loader
  import snl_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // host write bus
  input  logic               p_wr_en,
  input  logic [PADDR_W-1:0] p_addr,
  input  logic [WGT_W-1:0]   p_data,
  // to the layers
  output layer_wr_t          wr_l1,
  output layer_wr_t          wr_l2,
  output layer_wr_t          wr_l3,
  // configuration
  output logic [7:0]         chmap [N_BES],
  output logic [2:0]         n_out,
  output logic [15:0]        param_wr_cnt,
  output logic [15:0]        bad_addr_cnt
);

  function automatic layer_wr_t mk_wr(input logic is_bias, input logic [15:0] neuron,
                                      input logic [15:0] idx, input logic [WGT_W-1:0] d);
    layer_wr_t w;
    w.en        = 1'b1;
    w.is_bias   = is_bias;
    w.neuron    = neuron;
    w.input_idx = idx;
    w.data      = wgt_t'(d);
    return w;
  endfunction

  layer_wr_t d_l1, d_l2, d_l3;
  logic      d_bad;

  always_comb begin
    int unsigned a;
    a     = 32'(p_addr);
    d_l1  = '0;
    d_l2  = '0;
    d_l3  = '0;
    d_bad = 1'b0;
    if (p_wr_en) begin
      if (a < L1_BBASE)
        d_l1 = mk_wr(1'b0, 16'((a - L1_WBASE) / N_FEAT), 16'((a - L1_WBASE) % N_FEAT), p_data);
      else if (a < L2_WBASE)
        d_l1 = mk_wr(1'b1, 16'(a - L1_BBASE), 16'd0, p_data);
      else if (a < L2_BBASE)
        d_l2 = mk_wr(1'b0, 16'((a - L2_WBASE) / N_HID1), 16'((a - L2_WBASE) % N_HID1), p_data);
      else if (a < L3_WBASE)
        d_l2 = mk_wr(1'b1, 16'(a - L2_BBASE), 16'd0, p_data);
      else if (a < L3_BBASE)
        d_l3 = mk_wr(1'b0, 16'((a - L3_WBASE) / N_HID2), 16'((a - L3_WBASE) % N_HID2), p_data);
      else if (a < N_PARAMS)
        d_l3 = mk_wr(1'b1, 16'(a - L3_BBASE), 16'd0, p_data);
      else if (!(a >= CFG_CHMAP && a < CFG_CHMAP + N_BES) && a != CFG_NOUT)
        d_bad = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_l1        <= '0;
      wr_l2        <= '0;
      wr_l3        <= '0;
      n_out        <= 3'(N_OUT);
      param_wr_cnt <= '0;
      bad_addr_cnt <= '0;
      for (int j = 0; j < N_BES; j++) chmap[j] <= 8'(j);
    end else begin
      wr_l1 <= d_l1;
      wr_l2 <= d_l2;
      wr_l3 <= d_l3;
      if (d_l1.en || d_l2.en || d_l3.en) param_wr_cnt <= param_wr_cnt + 1'b1;
      if (d_bad) bad_addr_cnt <= bad_addr_cnt + 1'b1;
      if (p_wr_en) begin
        for (int j = 0; j < N_BES; j++)
          if (32'(p_addr) == CFG_CHMAP + j) chmap[j] <= p_data[7:0];
        if (32'(p_addr) == CFG_NOUT) begin
          if (p_data == '0)                n_out <= 3'd1;
          else if (32'(p_data) > N_OUT)    n_out <= 3'(N_OUT);
          else                             n_out <= p_data[2:0];
        end
      end
    end
  end

endmodule
