// pool: the pooling kernel (paper Sec. 3.1, Fig. 2, "POOL").
//
// The paper names a pooling layer run as a kernel of its own but gives no
// detail, so this is the simplest unit that does it.  It reads a feature
// map from memory, and for every output pixel and channel group reduces the
// k x k window (stride S, border pad) of VEC_FAC-channel words to one word,
// lane by lane, then writes it back.  Max pooling keeps the largest value;
// average pooling adds the values and multiplies by cfg.pool_scale, which the
// host sets to 1/(k*k).  Window positions outside the map are skipped, which
// for max pooling is padding with minus infinity.
//
// One read is outstanding at a time, so a k x k window costs about k*k times
// the memory latency.  Interface: start, cfg (in_*, out_*, k, stride, pad,
// pool_avg, pool_scale, ifm_base, ofm_base), done; read and write ports as in
// mem_write, with every lane written.
//
// Lint: the layer configuration is one struct shared by all kernels;
// the fields this kernel does not need are reported as unused bits.
// Lint: -Wall reports the scnn_pkg constants this module does not use
// (UNUSEDPARAM); they are shared defaults for other modules.
module pool
  import scnn_pkg::*;
#(
  parameter int unsigned VEC_FAC = VEC_FAC_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  layer_cfg_t           cfg,
  output logic                 done,
  output logic                 rd_req_valid,
  output addr_t                rd_req_addr,
  input  logic                 rd_req_ready,
  input  logic                 rd_resp_valid,
  input  fp32_t [VEC_FAC-1:0]  rd_resp_data,
  output logic                 wr_valid,
  output addr_t                wr_addr,
  output fp32_t [VEC_FAC-1:0]  wr_data,
  output logic  [VEC_FAC-1:0]  wr_mask,
  input  logic                 wr_ready
);
  typedef enum logic [2:0] {S_IDLE, S_NEXT, S_RREQ, S_RWAIT, S_WRITE} state_e;
  state_e state;

  logic [15:0]         g, oy, ox, py, px;
  logic                have;               // acc holds at least one value
  fp32_t [VEC_FAC-1:0] acc, mx, sm, sc;
  logic signed [31:0]  iy, ix;
  logic                inb, last_tap;

  always_comb begin
    iy  = 32'(oy) * 32'(cfg.stride) + 32'(py) - 32'(cfg.pad);
    ix  = 32'(ox) * 32'(cfg.stride) + 32'(px) - 32'(cfg.pad);
    inb = (iy >= 0) && (iy < $signed(32'(cfg.in_h))) && (ix >= 0) && (ix < $signed(32'(cfg.in_w)));
    last_tap = (py + 16'd1 == 16'(cfg.k)) && (px + 16'd1 == 16'(cfg.k));
    rd_req_valid = (state == S_RREQ);
    rd_req_addr  = cfg.ifm_base + addr_t'((32'(g) * 32'(cfg.in_h) + 32'(iy)) * 32'(cfg.in_w) + 32'(ix));
    wr_valid     = (state == S_WRITE);
    wr_addr      = cfg.ofm_base + addr_t'((32'(g) * 32'(cfg.out_h) + 32'(oy)) * 32'(cfg.out_w) + 32'(ox));
    wr_data      = cfg.pool_avg ? sc : acc;
    wr_mask      = '1;
  end

  for (genvar i = 0; i < VEC_FAC; i++) begin : g_lane
    fp32_max u_max (.a(acc[i]), .b(rd_resp_data[i]), .y(mx[i]));
    fp32_add u_add (.a(acc[i]), .b(rd_resp_data[i]), .y(sm[i]));
    fp32_mul u_mul (.a(acc[i]), .b(cfg.pool_scale), .y(sc[i]));
  end

  assign done = (state == S_IDLE) && !start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {g, oy, ox, py, px} <= '0;
      have <= 1'b0;
      acc  <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          {g, oy, ox, py, px} <= '0;
          have  <= 1'b0;
          acc   <= '0;
          state <= S_NEXT;
        end
        // step through the window taps, skipping those outside the map
        S_NEXT: begin
          if (inb) state <= S_RREQ;
          else if (last_tap) state <= S_WRITE;
          else begin
            if (px + 16'd1 < 16'(cfg.k)) px <= px + 16'd1;
            else begin px <= '0; py <= py + 16'd1; end
          end
        end
        S_RREQ: if (rd_req_ready) state <= S_RWAIT;
        S_RWAIT: if (rd_resp_valid) begin
          acc  <= !have ? rd_resp_data : (cfg.pool_avg ? sm : mx);
          have <= 1'b1;
          if (last_tap) state <= S_WRITE;
          else begin
            state <= S_NEXT;
            if (px + 16'd1 < 16'(cfg.k)) px <= px + 16'd1;
            else begin px <= '0; py <= py + 16'd1; end
          end
        end
        S_WRITE: if (wr_ready) begin
          px <= '0; py <= '0; have <= 1'b0; acc <= '0;
          state <= S_NEXT;
          if (ox + 16'd1 < cfg.out_w) ox <= ox + 16'd1;
          else begin
            ox <= '0;
            if (oy + 16'd1 < cfg.out_h) oy <= oy + 16'd1;
            else begin
              oy <= '0;
              if (g + 16'd1 < cfg.in_cg) g <= g + 16'd1;
              else state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
