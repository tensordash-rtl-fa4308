// td_pe: one processing element: LANES FP32 multipliers, a binary adder tree
// and an accumulator, all contributing to a single output value.
//
// Each cycle with acc_en high the LANES products a[i]*b[i] are summed pairwise
// (16 -> 8 -> 4 -> 2 -> 1, each node an fp32_add rounding to nearest even)
// and the tree result is added to the accumulator. clear loads +0 into the
// accumulator (start of a new output). Operands arrive already routed by the
// staging-buffer multiplexers; lanes without an effectual pair receive zeros.
// macs counts the lanes that did work since the last clear (lane_busy bits
// high while acc_en), which lets a testbench see the work actually done.
//
// Timing: multiply, tree and accumulate happen in one cycle; acc is the
// register. The paper gives the structure (N multipliers feeding one
// accumulator, Fig. 6 / Fig. 12); the single-cycle datapath and the pairwise
// summation order are this design's choices.
module td_pe
  import td_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       acc_en,
  input  row_t       a,
  input  row_t       b,
  input  lane_mask_t lane_busy,
  output fp32_t      acc,
  output logic [15:0] macs
);
  localparam int NODES = 2 * LANES - 1;
  fp32_t node [NODES];   // node[0] is the root; node[k] = node[2k+1] + node[2k+2]
  fp32_t acc_q, acc_d;
  logic [15:0] macs_q;

  for (genvar i = 0; i < LANES; i++) begin : g_mul
    fp32_mul u_mul (.a(a[i]), .b(b[i]), .y(node[LANES - 1 + i]));
  end
  for (genvar k = 0; k < LANES - 1; k++) begin : g_tree
    fp32_add u_add (.a(node[2*k+1]), .b(node[2*k+2]), .y(node[k]));
  end
  fp32_add u_acc (.a(acc_q), .b(node[0]), .y(acc_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q  <= '0;
      macs_q <= '0;
    end else if (clear) begin
      acc_q  <= '0;
      macs_q <= '0;
    end else if (acc_en) begin
      acc_q  <= acc_d;
      macs_q <= macs_q + 16'($countones(lane_busy));
    end
  end

  assign acc  = acc_q;
  assign macs = macs_q;
endmodule
