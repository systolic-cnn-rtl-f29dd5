// mem_write: the write-back kernel with the optional ELTWISE and ReLU layers
// (paper Sec. 3.1, Fig. 2; MemWrite kernel).
//
// Output vectors of PE_NUM channels arrive from the convolution engine in
// pixel order (row by row) for one output-channel group at a time and wait
// in a FIFO.  For each one the kernel optionally reads the residual word at
// the same position of a second feature map and adds it lane by lane
// (ELTWISE, for residual networks), optionally clamps negatives to zero
// (ReLU), and writes the PE_NUM channels into their lanes of the VEC_FAC-wide
// output word with a lane mask; channels past the layer's last are masked.
//
// Taken from the paper: ELTWISE and ReLU share the write-back kernel and are
// enabled per layer at run time.  This design's choices: the FIFO
// (DEPTH vectors), the one-vector-at-a-time sequence, the output layout (see
// scnn_pkg) and the requirement that PE_NUM divides VEC_FAC.
//
// Interface: start with grp resets the pixel counters for a group; grp_done
// is high once all out_h*out_w vectors of the group are written.  space is
// high when the FIFO can take a vector; it is the enable of the convolution
// engine, so a slow memory stalls the whole engine rather than losing data.
//
// Lint: the layer configuration is one struct shared by all kernels;
// the fields this kernel does not need are reported as unused bits.
// Lint: SYNCASYNCNET on rst_n is expected: besides resetting the flops
// asynchronously, rst_n disables the assertions (disable iff), which the
// linter counts as a synchronous use; no flop samples it.
// Lint: -Wall reports the scnn_pkg constants this module does not use
// (UNUSEDPARAM); they are shared defaults for other modules.
module mem_write
  import scnn_pkg::*;
#(
  parameter int unsigned PE_NUM  = PE_NUM_DEF,
  parameter int unsigned VEC_FAC = VEC_FAC_DEF,
  parameter int unsigned DEPTH   = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [15:0]          grp,
  input  layer_cfg_t           cfg,
  output logic                 grp_done,
  // from the convolution engine
  input  logic                 in_valid,
  input  fp32_t [PE_NUM-1:0]   in_data,
  output logic                 space,
  // residual read port
  output logic                 rd_req_valid,
  output addr_t                rd_req_addr,
  input  logic                 rd_req_ready,
  input  logic                 rd_resp_valid,
  input  fp32_t [VEC_FAC-1:0]  rd_resp_data,
  // output write port
  output logic                 wr_valid,
  output addr_t                wr_addr,
  output fp32_t [VEC_FAC-1:0]  wr_data,
  output logic  [VEC_FAC-1:0]  wr_mask,
  input  logic                 wr_ready
);

  if (VEC_FAC % PE_NUM != 0) begin : g_chk
    $error("mem_write: PE_NUM must divide VEC_FAC");
  end

  typedef enum logic [1:0] {S_IDLE, S_RREQ, S_RWAIT, S_WRITE} state_e;
  state_e state;

  fp32_t [PE_NUM-1:0]  f_out, v, sum;
  logic                f_empty, f_full, f_pop;
  logic [$clog2(DEPTH+1)-1:0] f_cnt;
  logic [15:0]         oy, ox;
  logic [31:0]         written, total;
  logic [31:0]         cgo, lo;
  fp32_t [VEC_FAC-1:0] res;
  addr_t               pix_addr;

  sync_fifo #(.WIDTH(PE_NUM*32), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push(in_valid && space), .din(in_data), .pop(f_pop), .dout(f_out),
    .empty(f_empty), .full(f_full), .count(f_cnt)
  );
  assign space = !f_full;

  always_comb begin
    cgo      = (32'(grp) * PE_NUM) / VEC_FAC;
    lo       = (32'(grp) * PE_NUM) % VEC_FAC;
    total    = 32'(cfg.out_h) * 32'(cfg.out_w);
    pix_addr = addr_t'((cgo * 32'(cfg.out_h) + 32'(oy)) * 32'(cfg.out_w) + 32'(ox));
  end

  // ELTWISE adders and ReLU
  for (genvar n = 0; n < PE_NUM; n++) begin : g_lane
    fp32_t rsel;
    always_comb begin
      rsel = res[n];
      for (int q = 0; q < int'(VEC_FAC / PE_NUM); q++)
        if (lo == 32'(q * PE_NUM)) rsel = res[q*PE_NUM + n];
    end
    fp32_add u_add (.a(f_out[n]), .b(rsel), .y(sum[n]));
    always_comb begin
      v[n] = cfg.elt_en ? sum[n] : f_out[n];
      if (cfg.relu_en && v[n][31]) v[n] = '0;
    end
  end

  always_comb begin
    rd_req_valid = (state == S_RREQ);
    rd_req_addr  = cfg.res_base + pix_addr;
    wr_valid     = (state == S_WRITE);
    wr_addr      = cfg.ofm_base + pix_addr;
    wr_data      = '0;
    wr_mask      = '0;
    for (int q = 0; q < int'(VEC_FAC / PE_NUM); q++)
      if (lo == 32'(q * PE_NUM))
        for (int n = 0; n < int'(PE_NUM); n++) begin
          wr_data[q*PE_NUM + n] = v[n];
          wr_mask[q*PE_NUM + n] = (32'(grp) * PE_NUM + 32'(n) < 32'(cfg.out_c));
        end
    f_pop = (state == S_WRITE) && wr_ready;
  end

  assign grp_done = (written == total) && !start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      oy      <= '0;
      ox      <= '0;
      written <= '0;
      res     <= '0;
    end else if (start) begin
      state   <= S_IDLE;
      oy      <= '0;
      ox      <= '0;
      written <= '0;
    end else begin
      case (state)
        S_IDLE:  if (!f_empty) state <= cfg.elt_en ? S_RREQ : S_WRITE;
        S_RREQ:  if (rd_req_ready) state <= S_RWAIT;
        S_RWAIT: if (rd_resp_valid) begin
                   res   <= rd_resp_data;
                   state <= S_WRITE;
                 end
        S_WRITE: if (wr_ready) begin
                   state   <= S_IDLE;
                   written <= written + 32'd1;
                   if (ox + 16'd1 < cfg.out_w) ox <= ox + 16'd1;
                   else begin
                     ox <= '0;
                     oy <= oy + 16'd1;
                   end
                 end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the array only offers a vector while the FIFO has room
  a_space: assert property (@(posedge clk) disable iff (!rst_n)
                            !(in_valid && !space) || f_cnt == ($clog2(DEPTH+1))'(DEPTH))
    else $error("mem_write: vector offered without space");
endmodule
