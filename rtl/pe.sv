// pe: one processing element of the 1-D systolic array (paper Fig. 6, left).
//
// A PE computes REUSE_FAC outputs of one output feature map (OFM) at once,
// one per inner-product unit.  All IP units use the same weight word, read
// from the PE's local weight cache, and each takes a different entry of the
// shifted IFM window, so one IFM vector loaded from memory is reused
// REUSE_FAC times.  IP unit r reads window entry rw-1-r, where rw (<=
// REUSE_FAC) is the run-time number of outputs per block: REUSE_FAC for a
// convolution, the batch size for a fully connected layer.  The window and
// its control are registered and passed unchanged to the next PE (the FF in
// the figure), so PE n sees the same data one cycle after PE n-1.  When the
// IP units finish a block their results are latched and the output MUX sends
// the first nv of them, one per cycle, as the OFM stream of this PE.
//
// Taken from the paper: REUSE_FAC IP units sharing weights, shifted IFM
// window input, one-cycle forwarding FF, output MUX, weights cached in the
// PE.  This design's choices: the cache depth WBUF_DEPTH, the one-cycle
// synchronous cache read that lines up with the forwarding FF, the result
// hold registers and the run-time window selection by rw.
//
// Timing: all state advances only when en is high.  A block's results leave
// on out_valid starting LAT+2 = 4 + log2(VEC_FAC) enabled cycles after the
// window carrying last entered (the first one straight from the IP units), one result per enabled cycle.
//
// Lint: only the low log2(WBUF_DEPTH) bits of wr_addr address the cache,
// and only ip_v[0] is read because all IP units finish together; both
// UNUSEDSIGNAL warnings are expected.
// Lint: SYNCASYNCNET on rst_n is expected: besides resetting the flops
// asynchronously, rst_n disables the assertions (disable iff), which the
// linter counts as a synchronous use; no flop samples it.
// Lint: -Wall reports the scnn_pkg constants this module does not use
// (UNUSEDPARAM); they are shared defaults for other modules.
module pe
  import scnn_pkg::*;
#(
  parameter int unsigned VEC_FAC    = VEC_FAC_DEF,
  parameter int unsigned REUSE_FAC  = REUSE_FAC_DEF,
  parameter int unsigned WBUF_DEPTH = WBUF_DEPTH_DEF
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                en,
  input  logic [7:0]                          rw,
  // IFM window from the buffer or the previous PE
  input  fp32_t [REUSE_FAC-1:0][VEC_FAC-1:0]  win_in,
  input  win_ctrl_t                           ctrl_in,
  // the same, one cycle later, to the next PE
  output fp32_t [REUSE_FAC-1:0][VEC_FAC-1:0]  win_out,
  output win_ctrl_t                           ctrl_out,
  // weight-cache write port
  input  logic                                wr_en,
  input  logic [15:0]                         wr_addr,
  input  fp32_t [VEC_FAC-1:0]                 wr_data,
  // OFM stream
  output logic                                out_valid,
  output fp32_t                               out_data
);
  localparam int unsigned LAT = 2 + $clog2(VEC_FAC);
  localparam int unsigned WAW = $clog2(WBUF_DEPTH);

  // ---------------- weight cache ----------------
  logic [VEC_FAC*32-1:0] wmem [WBUF_DEPTH];
  fp32_t [VEC_FAC-1:0]   w_q;

  always_ff @(posedge clk) begin
    if (wr_en) wmem[WAW'(wr_addr)] <= wr_data;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  w_q <= '0;
    else if (en) w_q <= wmem[WAW'(ctrl_in.waddr)];
  end

  // ---------------- forwarding FF ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_out  <= '0;
      ctrl_out <= '0;
    end else if (en) begin
      win_out  <= win_in;
      ctrl_out <= ctrl_in;
    end
  end

  // ---------------- IP units ----------------
  logic  [REUSE_FAC-1:0] ip_v;
  fp32_t [REUSE_FAC-1:0] ip_res;
  logic                  ip_comp;
  assign ip_comp = ctrl_out.valid & ctrl_out.comp;

  for (genvar r = 0; r < REUSE_FAC; r++) begin : g_ip
    fp32_t [VEC_FAC-1:0] sel;
    always_comb begin
      sel = win_out[0];
      for (int e = 0; e < REUSE_FAC; e++)
        if (int'(rw) - 1 - r == e) sel = win_out[e];
    end
    ip_unit #(.VEC_FAC(VEC_FAC)) u_ip (
      .clk, .rst_n, .en,
      .comp (ip_comp),
      .first(ctrl_out.first),
      .last (ctrl_out.last),
      .ifm  (sel),
      .w    (w_q),
      .res_valid(ip_v[r]),
      .res  (ip_res[r])
    );
  end

  // nv travels beside the IP pipeline
  logic [LAT-1:0][7:0] nv_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  nv_d <= '0;
    else if (en) nv_d <= {nv_d[LAT-2:0], ctrl_out.nv};
  end

  // ---------------- hold registers and output MUX ----------------
  fp32_t [REUSE_FAC-1:0] hold;
  logic [7:0]            left, idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold      <= '0;
      left      <= '0;
      idx       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (en) begin
      out_valid <= 1'b0;
      if (ip_v[0]) begin
        // first result goes out at once, the rest from the hold registers
        hold      <= ip_res;
        out_valid <= (nv_d[LAT-1] != 0);
        out_data  <= ip_res[0];
        left      <= (nv_d[LAT-1] != 0) ? nv_d[LAT-1] - 8'd1 : 8'd0;
        idx       <= 8'd1;
      end else if (left != 0) begin
        out_valid <= 1'b1;
        out_data  <= hold[idx[$clog2(REUSE_FAC+1)-1:0]];
        idx       <= idx + 8'd1;
        left      <= left - 8'd1;
      end
    end
  end

  // a new block must not arrive before the previous one has been sent
  a_mux_free: assert property (@(posedge clk) disable iff (!rst_n) (en && ip_v[0]) |-> (left == 0))
    else $error("pe: block results overrun the output MUX");
endmodule
