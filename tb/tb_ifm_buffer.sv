// tb_ifm_buffer: checks the IFM reader and shift-register buffer
// (VEC_FAC=4, REUSE_FAC=3) against a behavioural memory.
//
// For several layer shapes (padding, stride 2, a partial last block, rw=2)
// and with random memory back-pressure and random stalls, every window that
// is marked for accumulation is checked: its weight address must be the
// next kernel tap in channel-group / kernel-row / stride-phase / column
// order, and for each output r the window entry rw-1-r must equal the input
// pixel that output needs for that tap (zero in the padding).  first, last
// and the block's output count nv are checked, and the pass must cover every
// output block of the map and then report done.
module tb_ifm_buffer;
  import scnn_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned V = 4, R = 3;

  logic clk = 0, rst_n = 1, en = 1, start = 0, done;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset
  layer_cfg_t cfg;
  logic stall_en = 0;
  logic [0:0] rq_v, rq_r, rs_v;
  logic [0:0][31:0] rq_a;
  logic [0:0][V*32-1:0] rs_d;
  fp32_t [R-1:0][V-1:0] win;
  win_ctrl_t ctrl;
  always #5 clk = ~clk;

  ifm_buffer #(.VEC_FAC(V), .REUSE_FAC(R)) dut (
    .clk, .rst_n, .en, .start, .cfg, .done,
    .rd_req_valid(rq_v[0]), .rd_req_addr(rq_a[0]), .rd_req_ready(rq_r[0]),
    .rd_resp_valid(rs_v[0]), .rd_resp_data(rs_d[0]), .win, .ctrl
  );
  dram_model #(.VEC_FAC(V), .WORDS(1024), .NRD(1), .LAT(3)) u_mem (
    .clk, .stall_en, .req_valid(rq_v), .req_addr(rq_a), .req_ready(rq_r),
    .resp_valid(rs_v), .resp_data(rs_d),
    .wr_valid(1'b0), .wr_addr(32'd0), .wr_data('0), .wr_mask('0), .wr_ready()
  );

  int checks = 0, failures = 0;
  // expected tap sequence of one block
  int tap_j[$], tap_m1[$], tap_m2[$];
  int oy, ox0, blocks, ti;

  task automatic err(string s);
    failures++;
    if (failures < 10) $display("FAIL %s (oy=%0d ox0=%0d tap=%0d)", s, oy, ox0, ti);
  endtask

  function automatic fp32_t pix(int j, int iy, int ix, int v);
    if (iy < 0 || iy >= int'(cfg.in_h) || ix < 0 || ix >= int'(cfg.in_w)) return 0;
    return u_mem.mem[(j * int'(cfg.in_h) + iy) * int'(cfg.in_w) + ix][v*32 +: 32];
  endfunction

  task automatic make_taps();
    int smax;
    tap_j.delete(); tap_m1.delete(); tap_m2.delete();
    smax = (int'(cfg.stride) < int'(cfg.k)) ? int'(cfg.stride) : int'(cfg.k);
    for (int j = 0; j < int'(cfg.in_cg); j++)
      for (int m1 = 0; m1 < int'(cfg.k); m1++)
        for (int s = 0; s < smax; s++)
          for (int m2 = s; m2 < int'(cfg.k); m2 += int'(cfg.stride)) begin
            tap_j.push_back(j); tap_m1.push_back(m1); tap_m2.push_back(m2);
          end
  endtask

  always @(posedge clk) begin
    if (rst_n && en && ctrl.valid && ctrl.comp) begin
      int k, rw, nv_exp, j, m1, m2;
      k  = int'(cfg.k);
      rw = int'(cfg.rw);
      checks++;
      if (ti >= tap_j.size()) err("too many taps in block");
      else begin
        j = tap_j[ti]; m1 = tap_m1[ti]; m2 = tap_m2[ti];
        if (int'(ctrl.waddr) != (j * k + m1) * k + m2) err("weight address");
        if (ctrl.first != (ti == 0)) err("first flag");
        if (ctrl.last != (ti == tap_j.size() - 1)) err("last flag");
        for (int r = 0; r < rw; r++)
          for (int v = 0; v < int'(V); v++) begin
            checks++;
            if (win[rw - 1 - r][v] !== pix(j, oy * int'(cfg.stride) + m1 - int'(cfg.pad),
                                          (ox0 + r) * int'(cfg.stride) + m2 - int'(cfg.pad), v))
              err("window data");
          end
        if (ctrl.last) begin
          nv_exp = (ox0 + rw <= int'(cfg.out_w)) ? rw : int'(cfg.out_w) - ox0;
          checks++;
          if (int'(ctrl.nv) != nv_exp) err("nv");
        end
      end
      ti++;
      if (ctrl.last) begin
        ti = 0;
        blocks++;
        ox0 += rw;
        if (ox0 >= int'(cfg.out_w)) begin ox0 = 0; oy++; end
      end
    end
  end

  task automatic run(layer_cfg_t c);
    int t = 0;
    cfg = c; make_taps();
    oy = 0; ox0 = 0; blocks = 0; ti = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done && t < 20000) begin
      en = !stall_en || ($urandom_range(0, 3) != 0);
      @(negedge clk); t++;
    end
    en = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (!done) err("pass did not finish");
    checks++;
    if (blocks != int'(c.out_h) * ((int'(c.out_w) + int'(c.rw) - 1) / int'(c.rw))) err("block count");
  endtask

  function automatic layer_cfg_t mk(int w, int h, int cg, int k, int s, int p, int rw);
    layer_cfg_t c = '0;
    c.in_w = 16'(w); c.in_h = 16'(h); c.in_cg = 16'(cg); c.k = 5'(k); c.stride = 4'(s);
    c.pad = 4'(p); c.rw = 8'(rw); c.out_c = 4;
    c.out_w = 16'((w + 2*p - k) / s + 1); c.out_h = 16'((h + 2*p - k) / s + 1);
    return c;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    for (int i = 0; i < 1024; i++)
      for (int v = 0; v < int'(V); v++) u_mem.mem[i][v*32 +: 32] = frand(3);
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(mk(8, 5, 2, 3, 1, 1, 3));
    stall_en = 1;
    run(mk(8, 5, 2, 3, 1, 1, 3));
    run(mk(9, 7, 1, 3, 2, 0, 3));
    run(mk(11, 6, 2, 5, 3, 2, 3));
    run(mk(7, 4, 2, 3, 1, 1, 2));
    run(mk(2, 1, 3, 1, 1, 0, 2));
    run(mk(1, 1, 3, 1, 1, 0, 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
