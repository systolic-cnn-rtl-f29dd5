// ip_unit: one inner-product (IP) unit of a PE (paper Fig. 6, right).
//
// VEC_FAC single-precision multipliers form the element-wise products of an
// IFM vector (VEC_FAC channels at one pixel) and the weight vector, a
// pipelined binary adder tree reduces them to one partial inner product, and
// an accumulator folds successive partial products into the full inner
// product of any length (all channel groups and kernel taps of one output).
// This structure (Mult 1..p, pipelined adder tree, accumulator with a
// feedback FF) follows the paper's figure; the register placement is this
// design's choice: one register after the multipliers and one after every
// tree level, so a value takes 1 + log2(VEC_FAC) cycles to reach the
// accumulator.  VEC_FAC must be a power of two.
//
// Interface: all registers advance only when en is high (global stall).
// On an enabled cycle with comp high the vectors are consumed; first starts
// a new sum, last marks its final term.  res_valid pulses for one enabled
// cycle, LAT = 2 + log2(VEC_FAC) enabled cycles after the cycle with last,
// with res holding the complete sum.  Initiation interval is one cycle.
//
// Lint: -Wall reports the scnn_pkg constants this module does not use
// (UNUSEDPARAM); they are shared defaults for other modules.
module ip_unit
  import scnn_pkg::*;
#(
  parameter int unsigned VEC_FAC = VEC_FAC_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 comp,
  input  logic                 first,
  input  logic                 last,
  input  fp32_t [VEC_FAC-1:0]  ifm,
  input  fp32_t [VEC_FAC-1:0]  w,
  output logic                 res_valid,
  output fp32_t                res
);
  localparam int unsigned LV = $clog2(VEC_FAC);

  // tree level l holds VEC_FAC >> l values; level 0 = products
  fp32_t [LV:0][VEC_FAC-1:0] lvl;
  logic  [LV:0][2:0]         ctl;   // {comp, first, last} per level: bits 2, 1, 0
  fp32_t [VEC_FAC-1:0]       prod;

  for (genvar i = 0; i < VEC_FAC; i++) begin : g_mul
    fp32_mul u_mul (.a(ifm[i]), .b(w[i]), .y(prod[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lvl[0] <= '0;
      ctl[0] <= '0;
    end else if (en) begin
      lvl[0] <= prod;
      ctl[0] <= {comp, first, last};
    end
  end

  for (genvar l = 1; l <= LV; l++) begin : g_lvl
    localparam int unsigned N = VEC_FAC >> l;
    fp32_t [N-1:0] s;
    for (genvar i = 0; i < N; i++) begin : g_add
      fp32_add u_add (.a(lvl[l-1][2*i]), .b(lvl[l-1][2*i+1]), .y(s[i]));
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        lvl[l] <= '0;
        ctl[l] <= '0;
      end else if (en) begin
        lvl[l]        <= '0;
        lvl[l][N-1:0] <= s;
        ctl[l]        <= ctl[l-1];
      end
    end
  end

  // accumulator with feedback register
  fp32_t acc, acc_sum, acc_nxt;
  fp32_add u_acc (.a(acc), .b(lvl[LV][0]), .y(acc_sum));
  assign acc_nxt = ctl[LV][1] ? lvl[LV][0] : acc_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      res       <= '0;
      res_valid <= 1'b0;
    end else if (en) begin
      res_valid <= ctl[LV][2] & ctl[LV][0];
      if (ctl[LV][2]) begin
        acc <= acc_nxt;
        if (ctl[LV][0]) res <= acc_nxt;
      end
    end
  end
endmodule
