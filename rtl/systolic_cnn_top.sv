// systolic_cnn_top: the Systolic-CNN accelerator (paper Fig. 2).
//
// Data flow of a convolution or fully connected layer: the IFM buffer
// (MemRD) reads VEC_FAC-channel input words from off-chip memory and shifts
// them into a REUSE_FAC-word window; the window travels down the 1-D
// systolic array of PE_NUM PEs, where every PE multiplies it with the
// weights of its own output channel, cached in the PE; the deskewed PE
// outputs pass through the write-back kernel, which adds a residual map
// (ELTWISE) and applies ReLU when enabled, and are written to memory.  A
// pooling layer runs the separate POOL kernel from memory to memory.  The
// layer controller sequences the output-channel groups and the weight
// loads.  The whole convolution datapath advances only when the write-back
// FIFO has room (en), so memory back-pressure stalls it without loss.
//
// The local response normalisation kernel (LRN) of the paper is not part of
// this RTL; its position in the flow (after CONV) is left empty.
//
// Ports: start/cfg/busy/done as in layer_ctrl (cfg from the host, stable
// during a layer).  Off-chip memory is reached through four ports of
// VEC_FAC x 32-bit words: IFM read (also used by POOL), weight read,
// residual read and output write.  A read port is a request handshake
// (*_req_valid/_req_ready, word address) with in-order responses
// (*_resp_valid, data) that cannot be refused; the write port has a
// per-lane mask.  stall is high on cycles where the array is held by
// write-back back-pressure.
module systolic_cnn_top
  import scnn_pkg::*;
#(
  parameter int unsigned PE_NUM     = PE_NUM_DEF,
  parameter int unsigned VEC_FAC    = VEC_FAC_DEF,
  parameter int unsigned REUSE_FAC  = REUSE_FAC_DEF,
  parameter int unsigned WBUF_DEPTH = WBUF_DEPTH_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  layer_cfg_t           cfg,
  output logic                 busy,
  output logic                 done,
  output logic                 stall,
  // IFM read port
  output logic                 ifm_req_valid,
  output addr_t                ifm_req_addr,
  input  logic                 ifm_req_ready,
  input  logic                 ifm_resp_valid,
  input  fp32_t [VEC_FAC-1:0]  ifm_resp_data,
  // weight read port
  output logic                 wt_req_valid,
  output addr_t                wt_req_addr,
  input  logic                 wt_req_ready,
  input  logic                 wt_resp_valid,
  input  fp32_t [VEC_FAC-1:0]  wt_resp_data,
  // residual read port
  output logic                 res_req_valid,
  output addr_t                res_req_addr,
  input  logic                 res_req_ready,
  input  logic                 res_resp_valid,
  input  fp32_t [VEC_FAC-1:0]  res_resp_data,
  // output write port
  output logic                 ofm_wr_valid,
  output addr_t                ofm_wr_addr,
  output fp32_t [VEC_FAC-1:0]  ofm_wr_data,
  output logic  [VEC_FAC-1:0]  ofm_wr_mask,
  input  logic                 ofm_wr_ready
);
  logic        en;
  logic [15:0] grp;
  logic        wl_start, wl_done, rd_start, rd_done, wb_start, wb_done, pool_start, pool_done;

  layer_ctrl #(.PE_NUM(PE_NUM)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .grp,
    .wl_start, .wl_done, .rd_start, .rd_done, .wb_start, .wb_done, .pool_start, .pool_done
  );

  // ---------------- weights ----------------
  logic                wr_en;
  logic [7:0]          wr_pe;
  logic [15:0]         wr_addr;
  fp32_t [VEC_FAC-1:0] wr_data;

  weight_loader #(.PE_NUM(PE_NUM), .VEC_FAC(VEC_FAC)) u_wl (
    .clk, .rst_n, .start(wl_start), .grp, .cfg, .done(wl_done),
    .rd_req_valid(wt_req_valid), .rd_req_addr(wt_req_addr), .rd_req_ready(wt_req_ready),
    .rd_resp_valid(wt_resp_valid), .rd_resp_data(wt_resp_data),
    .wr_en, .wr_pe, .wr_addr, .wr_data
  );

  // ---------------- IFM buffer and systolic array ----------------
  logic  ib_req_valid;
  addr_t ib_req_addr;
  fp32_t [REUSE_FAC-1:0][VEC_FAC-1:0] win;
  win_ctrl_t ctrl;
  logic  ce_valid;
  fp32_t [PE_NUM-1:0] ce_data;

  ifm_buffer #(.VEC_FAC(VEC_FAC), .REUSE_FAC(REUSE_FAC)) u_ifm (
    .clk, .rst_n, .en, .start(rd_start), .cfg, .done(rd_done),
    .rd_req_valid(ib_req_valid), .rd_req_addr(ib_req_addr),
    .rd_req_ready(ifm_req_ready && cfg.op == OP_CONV),
    .rd_resp_valid(ifm_resp_valid && cfg.op == OP_CONV), .rd_resp_data(ifm_resp_data),
    .win, .ctrl
  );

  conv_engine #(.PE_NUM(PE_NUM), .VEC_FAC(VEC_FAC), .REUSE_FAC(REUSE_FAC),
                .WBUF_DEPTH(WBUF_DEPTH)) u_conv (
    .clk, .rst_n, .en, .rw(cfg.rw), .win_in(win), .ctrl_in(ctrl),
    .wr_en, .wr_pe, .wr_addr, .wr_data,
    .out_valid(ce_valid), .out_data(ce_data)
  );

  // ---------------- ELTWISE + ReLU write-back ----------------
  logic                mw_wr_valid;
  addr_t               mw_wr_addr;
  fp32_t [VEC_FAC-1:0] mw_wr_data;
  logic  [VEC_FAC-1:0] mw_wr_mask;

  mem_write #(.PE_NUM(PE_NUM), .VEC_FAC(VEC_FAC)) u_wb (
    .clk, .rst_n, .start(wb_start), .grp, .cfg, .grp_done(wb_done),
    .in_valid(ce_valid), .in_data(ce_data), .space(en),
    .rd_req_valid(res_req_valid), .rd_req_addr(res_req_addr), .rd_req_ready(res_req_ready),
    .rd_resp_valid(res_resp_valid), .rd_resp_data(res_resp_data),
    .wr_valid(mw_wr_valid), .wr_addr(mw_wr_addr), .wr_data(mw_wr_data),
    .wr_mask(mw_wr_mask), .wr_ready(ofm_wr_ready && cfg.op == OP_CONV)
  );

  // ---------------- POOL ----------------
  logic                pl_req_valid, pl_wr_valid;
  addr_t               pl_req_addr, pl_wr_addr;
  fp32_t [VEC_FAC-1:0] pl_wr_data;
  logic  [VEC_FAC-1:0] pl_wr_mask;

  pool #(.VEC_FAC(VEC_FAC)) u_pool (
    .clk, .rst_n, .start(pool_start), .cfg, .done(pool_done),
    .rd_req_valid(pl_req_valid), .rd_req_addr(pl_req_addr),
    .rd_req_ready(ifm_req_ready && cfg.op == OP_POOL),
    .rd_resp_valid(ifm_resp_valid && cfg.op == OP_POOL), .rd_resp_data(ifm_resp_data),
    .wr_valid(pl_wr_valid), .wr_addr(pl_wr_addr), .wr_data(pl_wr_data), .wr_mask(pl_wr_mask),
    .wr_ready(ofm_wr_ready && cfg.op == OP_POOL)
  );

  // ---------------- port sharing by layer type ----------------
  always_comb begin
    if (cfg.op == OP_POOL) begin
      ifm_req_valid = pl_req_valid;
      ifm_req_addr  = pl_req_addr;
      ofm_wr_valid  = pl_wr_valid;
      ofm_wr_addr   = pl_wr_addr;
      ofm_wr_data   = pl_wr_data;
      ofm_wr_mask   = pl_wr_mask;
    end else begin
      ifm_req_valid = ib_req_valid;
      ifm_req_addr  = ib_req_addr;
      ofm_wr_valid  = mw_wr_valid;
      ofm_wr_addr   = mw_wr_addr;
      ofm_wr_data   = mw_wr_data;
      ofm_wr_mask   = mw_wr_mask;
    end
  end

  assign stall = busy && !en;
endmodule
