// ifm_buffer: the IFM reader and shift-register IFM buffer (the MemRD
// kernel; paper Sec. 3.3, Fig. 5).
//
// For every output block - REUSE_FAC (or rw) neighbouring outputs of one OFM
// row - the reader walks the input feature map in the order of the paper's
// data-loading scheme: for each channel group of VEC_FAC channels, for each
// kernel row, it loads rw + c - 1 consecutive pixels along the row, one
// VEC_FAC-channel word per cycle, into a shift register of REUSE_FAC words.
// Once rw words are in, every further word completes one kernel tap for all
// rw outputs at once: window entry rw-1-r then holds the input pixel that
// output r needs for kernel column m2 = t - rw + 1 (t counts the words of the
// row), so all IP units share the weight word (g, ky, m2).  The window and a
// control word (comp, first, last, weight-cache address, outputs in block)
// go to the first PE.  Words that fall in the zero padding are not read from
// memory; zeros are shifted in instead.
//
// Taken from the paper: the buffer size REUSE_FAC x VEC_FAC, one
// 1x1xVEC_FAC load per cycle, the row-then-kernel-row-then-channel sliding
// order.  This design's choices: strides S > 1 are handled by running the
// row walk once per phase s = 0..min(S,c)-1 over pixels x = (x0+t)*S + s,
// which keeps the buffer at REUSE_FAC words; the memory request/response
// ports; the in-flight FIFOs (DEPTH entries) that let memory latency be
// hidden.
//
// Interface: start (one cycle) begins a pass over all output blocks of the
// layer in cfg for one output-channel group; done rises when every word has
// been shifted in.  Memory reads: rd_req_valid/rd_req_ready handshake with a
// word address; rd_resp_valid returns the data in request order and cannot
// be refused.  The shift register moves only on enabled cycles (en) with a
// word available; otherwise a bubble (ctrl.valid = 0) goes down the array.
//
// Lint: the layer configuration is one struct shared by all kernels;
// the fields this kernel does not need are reported as unused bits.
// Lint: SYNCASYNCNET on rst_n is expected: besides resetting the flops
// asynchronously, rst_n disables the assertions (disable iff), which the
// linter counts as a synchronous use; no flop samples it.
// Lint: -Wall reports the scnn_pkg constants this module does not use
// (UNUSEDPARAM); they are shared defaults for other modules.
module ifm_buffer
  import scnn_pkg::*;
#(
  parameter int unsigned VEC_FAC   = VEC_FAC_DEF,
  parameter int unsigned REUSE_FAC = REUSE_FAC_DEF,
  parameter int unsigned DEPTH     = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                en,
  input  logic                                start,
  input  layer_cfg_t                          cfg,
  output logic                                done,
  // memory read port
  output logic                                rd_req_valid,
  output addr_t                               rd_req_addr,
  input  logic                                rd_req_ready,
  input  logic                                rd_resp_valid,
  input  fp32_t [VEC_FAC-1:0]                 rd_resp_data,
  // window to the first PE
  output fp32_t [REUSE_FAC-1:0][VEC_FAC-1:0]  win,
  output win_ctrl_t                           ctrl
);
  typedef struct packed {
    logic      pad;
    win_ctrl_t c;
  } meta_t;

  // ---------------- address generator ----------------
  logic        gen;                       // generator active
  logic [15:0] oy, ox0, j, m1, s, t, m2;
  logic signed [31:0] iy, ix;
  logic        comp, seg_end, blk_end, pad_cur, adv;
  logic [15:0] k16, s16, rw16;
  meta_t       m_in, m_out;
  logic        m_full, m_empty, r_empty, r_full;
  fp32_t [VEC_FAC-1:0] r_out;
  logic [$clog2(DEPTH+1)-1:0] m_cnt, r_cnt;

  always_comb begin
    k16  = 16'(cfg.k);
    s16  = 16'(cfg.stride);
    rw16 = 16'(cfg.rw);
    iy   = 32'(oy) * 32'(cfg.stride) + 32'(m1) - 32'(cfg.pad);
    ix   = (32'(ox0) + 32'(t)) * 32'(cfg.stride) + 32'(s) - 32'(cfg.pad);
    comp = (t >= rw16 - 16'd1);
    seg_end = comp && (m2 + s16 >= k16);
    blk_end = seg_end && (s + 16'd1 >= s16 || s + 16'd1 >= k16) &&
              (m1 + 16'd1 == k16) && (j + 16'd1 == cfg.in_cg);
    pad_cur = (iy < 0) || (iy >= $signed(32'(cfg.in_h))) || (ix < 0) || (ix >= $signed(32'(cfg.in_w)));
    m_in.pad     = pad_cur;
    m_in.c.valid = 1'b1;
    m_in.c.comp  = comp;
    m_in.c.first = comp && (j == 0) && (m1 == 0) && (s == 0) && (t == rw16 - 16'd1);
    m_in.c.last  = blk_end;
    m_in.c.waddr = (j * k16 + m1) * k16 + m2;
    m_in.c.nv    = (32'(ox0) + 32'(cfg.rw) <= 32'(cfg.out_w)) ? cfg.rw : 8'(cfg.out_w - ox0);
    rd_req_addr  = cfg.ifm_base + addr_t'((32'(j) * 32'(cfg.in_h) + 32'(iy)) * 32'(cfg.in_w) + 32'(ix));
    rd_req_valid = gen && !m_full && !pad_cur;
    adv          = gen && !m_full && (pad_cur || rd_req_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen <= 1'b0;
      {oy, ox0, j, m1, s, t, m2} <= '0;
    end else if (start) begin
      gen <= 1'b1;
      {oy, ox0, j, m1, s, t, m2} <= '0;
    end else if (adv) begin
      t <= t + 16'd1;
      if (comp) m2 <= m2 + s16;
      if (seg_end) begin
        t <= '0;
        if (s + 16'd1 < s16 && s + 16'd1 < k16) begin
          s <= s + 16'd1; m2 <= s + 16'd1;
        end else begin
          s <= '0; m2 <= '0;
          if (m1 + 16'd1 < k16) m1 <= m1 + 16'd1;
          else begin
            m1 <= '0;
            if (j + 16'd1 < cfg.in_cg) j <= j + 16'd1;
            else begin
              j <= '0;
              if (ox0 + rw16 < cfg.out_w) ox0 <= ox0 + rw16;
              else begin
                ox0 <= '0;
                if (oy + 16'd1 < cfg.out_h) oy <= oy + 16'd1;
                else gen <= 1'b0;
              end
            end
          end
        end
      end
    end
  end

  // ---------------- in-flight FIFOs ----------------
  logic pop;
  sync_fifo #(.WIDTH($bits(meta_t)), .DEPTH(DEPTH)) u_meta (
    .clk, .rst_n, .push(adv), .din(m_in), .pop(pop), .dout(m_out),
    .empty(m_empty), .full(m_full), .count(m_cnt)
  );
  sync_fifo #(.WIDTH(VEC_FAC*32), .DEPTH(DEPTH)) u_resp (
    .clk, .rst_n, .push(rd_resp_valid), .din(rd_resp_data), .pop(pop && !m_out.pad),
    .dout(r_out), .empty(r_empty), .full(r_full), .count(r_cnt)
  );

  assign pop  = en && !m_empty && (m_out.pad || !r_empty);
  assign done = !gen && m_empty && !start;

  // ---------------- shift register ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win  <= '0;
      ctrl <= '0;
    end else if (en) begin
      ctrl <= pop ? m_out.c : '0;
      if (pop) begin
        win[0] <= m_out.pad ? '0 : r_out;
        for (int e = 1; e < REUSE_FAC; e++) win[e] <= win[e-1];
      end
    end
  end

  // responses never exceed the words still waiting for them
  a_resp_room: assert property (@(posedge clk) disable iff (!rst_n) !(rd_resp_valid && r_full))
    else $error("ifm_buffer: response FIFO overflow");
  a_resp_cnt: assert property (@(posedge clk) disable iff (!rst_n) r_cnt <= m_cnt)
    else $error("ifm_buffer: more responses than outstanding words");
endmodule
