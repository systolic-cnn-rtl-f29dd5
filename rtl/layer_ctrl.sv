// layer_ctrl: runs one layer that the host has described in cfg.
//
// The paper has the host invoke the kernels once per layer and pass the
// layer's parameters at run time; the kernels themselves do not depend on the
// CNN model.  This controller plays the part of that invocation sequence.
// A pooling layer simply starts the pool kernel.  A convolution or fully
// connected layer is split into ceil(out_c / PE_NUM) output-channel groups;
// for each group it (1) loads the group's weights into the PE caches with
// the weight loader, then (2) starts the IFM buffer pass and the write-back
// counters and waits until the IFM pass is over and every output pixel of
// the group is written.  Loading and computing do not overlap (this design's
// choice: the cache is single-buffered).
//
// Interface: start (one cycle) with cfg stable for the whole layer; busy is
// high from start until the layer is written; done pulses for one cycle at
// the end.  Each *_start output is a one-cycle pulse; *_done inputs are
// levels.
//
// Lint: the layer configuration is one struct shared by all kernels;
// the fields this kernel does not need are reported as unused bits.
// Lint: -Wall reports the scnn_pkg constants this module does not use
// (UNUSEDPARAM); they are shared defaults for other modules.
module layer_ctrl
  import scnn_pkg::*;
#(
  parameter int unsigned PE_NUM = PE_NUM_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cfg_t  cfg,
  output logic        busy,
  output logic        done,
  output logic [15:0] grp,
  output logic        wl_start,
  input  logic        wl_done,
  output logic        rd_start,
  input  logic        rd_done,
  output logic        wb_start,
  input  logic        wb_done,
  output logic        pool_start,
  input  logic        pool_done
);
  typedef enum logic [2:0] {S_IDLE, S_POOL, S_WLOAD, S_WLWAIT, S_COMP, S_CWAIT} state_e;
  state_e state;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      grp   <= '0;
      done  <= 1'b0;
      wl_start <= 1'b0; rd_start <= 1'b0; wb_start <= 1'b0; pool_start <= 1'b0;
    end else begin
      done <= 1'b0;
      wl_start <= 1'b0; rd_start <= 1'b0; wb_start <= 1'b0; pool_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          grp <= '0;
          if (cfg.op == OP_POOL) begin
            pool_start <= 1'b1;
            state      <= S_POOL;
          end else state <= S_WLOAD;
        end
        S_POOL: if (!pool_start && pool_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_WLOAD: begin
          wl_start <= 1'b1;
          state    <= S_WLWAIT;
        end
        S_WLWAIT: if (!wl_start && wl_done) state <= S_COMP;
        S_COMP: begin
          rd_start <= 1'b1;
          wb_start <= 1'b1;
          state    <= S_CWAIT;
        end
        S_CWAIT: if (!rd_start && rd_done && wb_done) begin
          if ((32'(grp) + 1) * PE_NUM < 32'(cfg.out_c)) begin
            grp   <= grp + 16'd1;
            state <= S_WLOAD;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
