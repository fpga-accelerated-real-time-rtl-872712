// snl_vec_serializer - turns one layer's output vector into the input stream
// of the next layer.
//
// A vector of N activations is taken in one handshake and held in a register;
// it is then sent as N/PAR beats of PAR values, lowest index first, with
// out_last on the final beat. A new vector is accepted while the last beat of
// the previous one leaves, so back-to-back vectors stream without a gap.
//
// Interface: valid/ready on both sides. Timing: the first beat is offered the
// clock after the vector is accepted; N/PAR clocks per vector.
//
// This is glue of this design's own: the published design only says that the
// layers form a fully pipelined streaming data flow.
module snl_vec_serializer
  import snl_pkg::*;
#(
  parameter int unsigned N   = N_HID1,
  parameter int unsigned PAR = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  act_t in_data [N],
  output logic out_valid,
  input  logic out_ready,
  output act_t out_data [PAR],
  output logic out_last
);

  localparam int unsigned BEATS = N / PAR;
  localparam int unsigned BW    = (BEATS > 1) ? $clog2(BEATS) : 1;

  act_t          hold [N];
  logic [BW-1:0] idx;

  assign out_last = 32'(idx) == BEATS - 1;
  assign in_ready = !out_valid || (out_ready && out_last);

  always_comb begin
    for (int l = 0; l < PAR; l++) out_data[l] = hold[32'(idx) * PAR + l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      idx       <= '0;
      for (int i = 0; i < N; i++) hold[i] <= '0;
    end else begin
      if (out_valid && out_ready) begin
        if (out_last) begin
          idx       <= '0;
          out_valid <= 1'b0;
        end else begin
          idx <= idx + 1'b1;
        end
      end
      if (in_valid && in_ready) begin
        hold      <= in_data;
        out_valid <= 1'b1;
      end
    end
  end

endmodule
