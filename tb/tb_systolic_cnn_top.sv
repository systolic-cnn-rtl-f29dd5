// tb_systolic_cnn_top: end-to-end test of the accelerator at reduced size
// (PE_NUM=4, VEC_FAC=4, REUSE_FAC=3).
//
// A behavioural memory holds the feature maps and weights.  The test runs a
// sequence of layers the way a host would, each described only by its
// run-time configuration, and compares every output word with a reference
// computed here in double precision, rounded to single precision after each
// operation in the order the hardware uses (adder tree pairs, then the
// accumulator in block order).  Layers: 3x3 convolution with padding and
// ReLU over two output-channel groups (the second partly empty) with and
// without memory back-pressure, a stride-2 convolution with ELTWISE, a fully
// connected layer in batch mode and without batching, max and average
// pooling.  Each mechanism is counted and must occur.  With no back-pressure
// the IFM buffer must shift one word per cycle (initiation interval 1).
module tb_systolic_cnn_top;
  import scnn_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned PE  = 4;
  localparam int unsigned V   = 4;
  localparam int unsigned R   = 3;
  localparam int unsigned WB  = 64;
  localparam int unsigned WORDS = 4096;
  localparam addr_t IFM_B = 0, WT_B = 1000, RES_B = 2000, OFM_B = 3000;

  logic clk = 0, rst_n = 1, start = 0, busy, done, stall;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset
  layer_cfg_t cfg;
  logic stall_en = 0;
  always #5 clk = ~clk;

  logic [2:0]               rq_v, rq_r, rs_v;
  logic [2:0][31:0]         rq_a;
  logic [2:0][V*32-1:0]     rs_d;
  logic                     wv, wr_r;
  addr_t                    wa;
  fp32_t [V-1:0]            wd;
  logic  [V-1:0]            wm;

  systolic_cnn_top #(.PE_NUM(PE), .VEC_FAC(V), .REUSE_FAC(R), .WBUF_DEPTH(WB)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .stall,
    .ifm_req_valid(rq_v[0]), .ifm_req_addr(rq_a[0]), .ifm_req_ready(rq_r[0]),
    .ifm_resp_valid(rs_v[0]), .ifm_resp_data(rs_d[0]),
    .wt_req_valid(rq_v[1]), .wt_req_addr(rq_a[1]), .wt_req_ready(rq_r[1]),
    .wt_resp_valid(rs_v[1]), .wt_resp_data(rs_d[1]),
    .res_req_valid(rq_v[2]), .res_req_addr(rq_a[2]), .res_req_ready(rq_r[2]),
    .res_resp_valid(rs_v[2]), .res_resp_data(rs_d[2]),
    .ofm_wr_valid(wv), .ofm_wr_addr(wa), .ofm_wr_data(wd), .ofm_wr_mask(wm), .ofm_wr_ready(wr_r)
  );

  dram_model #(.VEC_FAC(V), .WORDS(WORDS), .NRD(3), .LAT(4)) u_mem (
    .clk, .stall_en, .req_valid(rq_v), .req_addr(rq_a), .req_ready(rq_r),
    .resp_valid(rs_v), .resp_data(rs_d),
    .wr_valid(wv), .wr_addr(wa), .wr_data(wd), .wr_mask(wm), .wr_ready(wr_r)
  );

  int checks = 0, failures = 0;
  int n_stall = 0, n_pad = 0, n_partial = 0, n_elt = 0, n_relu = 0, n_batch = 0;
  int n_stride = 0, n_mask = 0, n_maxpool = 0, n_avgpool = 0, n_fc1 = 0, n_groups = 0;
  longint cyc = 0;

  // ---------------- event counters ----------------
  int pops, first_pop, last_pop;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (stall) n_stall++;
    if (dut.u_ifm.pop && dut.u_ifm.m_out.pad) n_pad++;
    // rate window: from the first word read from memory to the last word
    if (dut.u_ifm.pop && dut.u_ctrl.grp == 0 && (pops > 0 || !dut.u_ifm.m_out.pad)) begin
      if (pops == 0) first_pop = int'(cyc);
      last_pop = int'(cyc);
      pops++;
    end
    if (dut.u_ctrl.wl_start) n_groups++;
  end

  // ---------------- memory access helpers ----------------
  function automatic fp32_t rd(addr_t a, int lane);
    return u_mem.mem[a][lane*32 +: 32];
  endfunction

  // ---------------- reference convolution ----------------
  function automatic fp32_t tree(fp32_t p [V]);
    fp32_t t [V];
    int n = int'(V);
    t = p;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) t[i] = fadd(t[2*i], t[2*i+1]);
      n = n / 2;
    end
    return t[0];
  endfunction

  function automatic fp32_t ref_conv(layer_cfg_t c, int oc, int oy, int ox);
    fp32_t acc = 0, term;
    fp32_t p [V];
    bit    fst = 1;
    int    nv = int'(c.in_cg) * int'(c.k) * int'(c.k);
    int    smax = (c.stride < 4'(c.k)) ? int'(c.stride) : int'(c.k);
    for (int j = 0; j < int'(c.in_cg); j++)
      for (int m1 = 0; m1 < int'(c.k); m1++)
        for (int s = 0; s < smax; s++)
          for (int m2 = s; m2 < int'(c.k); m2 += int'(c.stride)) begin
            int iy = oy * int'(c.stride) + m1 - int'(c.pad);
            int ix = ox * int'(c.stride) + m2 - int'(c.pad);
            addr_t wa_ = c.wt_base + addr_t'(oc * nv + (j * int'(c.k) + m1) * int'(c.k) + m2);
            for (int v = 0; v < int'(V); v++) begin
              fp32_t x = 0;
              if (iy >= 0 && iy < int'(c.in_h) && ix >= 0 && ix < int'(c.in_w))
                x = rd(c.ifm_base + addr_t'((j * int'(c.in_h) + iy) * int'(c.in_w) + ix), v);
              p[v] = fmul(x, rd(wa_, v));
            end
            term = tree(p);
            acc  = fst ? term : fadd(acc, term);
            fst  = 0;
          end
    return acc;
  endfunction

  // ---------------- layer runner ----------------
  task automatic run_layer(layer_cfg_t c, int max_cycles);
    int t = 0;
    cfg = c;
    pops = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done && t < max_cycles) begin @(negedge clk); t++; end
    checks++;
    if (!done) begin failures++; $display("FAIL layer did not finish"); end
  endtask

  // check a conv/FC layer's outputs against the reference
  task automatic check_conv(layer_cfg_t c);
    int ng = (int'(c.out_c) + PE - 1) / PE;
    for (int g = 0; g < ng; g++)
      for (int y = 0; y < int'(c.out_h); y++)
        for (int x = 0; x < int'(c.out_w); x++)
          for (int n = 0; n < int'(PE); n++) begin
            int oc = g * PE + n;
            int cgo = oc / V, lane = oc % V;
            addr_t a = c.ofm_base + addr_t'((cgo * int'(c.out_h) + y) * int'(c.out_w) + x);
            fp32_t got = rd(a, lane), exp;
            if (oc < int'(c.out_c)) begin
              exp = ref_conv(c, oc, y, x);
              if (c.elt_en) begin
                exp = fadd(exp, rd(c.res_base + (a - c.ofm_base), lane));
                n_elt++;
              end
              if (c.relu_en && exp[31]) begin exp = 0; n_relu++; end
            end else begin
              exp = 32'hDEADBEEF;     // masked lane keeps its old value
              n_mask++;
            end
            checks++;
            if (got !== exp) begin
              failures++;
              if (failures < 10) $display("FAIL conv oc=%0d y=%0d x=%0d got=%h exp=%h", oc, y, x, got, exp);
            end
          end
  endtask

  task automatic check_pool(layer_cfg_t c);
    for (int g = 0; g < int'(c.in_cg); g++)
      for (int y = 0; y < int'(c.out_h); y++)
        for (int x = 0; x < int'(c.out_w); x++)
          for (int v = 0; v < int'(V); v++) begin
            fp32_t acc = 0, got;
            bit    fst = 1;
            for (int py = 0; py < int'(c.k); py++)
              for (int px = 0; px < int'(c.k); px++) begin
                int iy = y * int'(c.stride) + py - int'(c.pad);
                int ix = x * int'(c.stride) + px - int'(c.pad);
                if (iy >= 0 && iy < int'(c.in_h) && ix >= 0 && ix < int'(c.in_w)) begin
                  fp32_t d = rd(c.ifm_base + addr_t'((g * int'(c.in_h) + iy) * int'(c.in_w) + ix), v);
                  acc = fst ? d : (c.pool_avg ? fadd(acc, d) : fmax(acc, d));
                  fst = 0;
                end
              end
            if (c.pool_avg) acc = fmul(acc, c.pool_scale);
            got = rd(c.ofm_base + addr_t'((g * int'(c.out_h) + y) * int'(c.out_w) + x), v);
            checks++;
            if (got !== acc) begin
              failures++;
              if (failures < 10) $display("FAIL pool g=%0d y=%0d x=%0d v=%0d got=%h exp=%h", g, y, x, v, got, acc);
            end
          end
  endtask

  task automatic fill(addr_t base, int n, int er);
    for (int i = 0; i < n; i++)
      for (int v = 0; v < int'(V); v++) u_mem.mem[base + addr_t'(i)][v*32 +: 32] = frand(er);
  endtask

  task automatic clear_ofm();
    for (int i = 0; i < 1000; i++) u_mem.mem[OFM_B + addr_t'(i)] = {V{32'hDEADBEEF}};
  endtask

  function automatic layer_cfg_t conv_cfg(int w, int h, int cg, int oc, int k, int s, int p, int rw);
    layer_cfg_t c = '0;
    c.op = OP_CONV;
    c.in_w = 16'(w); c.in_h = 16'(h); c.in_cg = 16'(cg); c.out_c = 16'(oc);
    c.k = 5'(k); c.stride = 4'(s); c.pad = 4'(p); c.rw = 8'(rw);
    c.out_w = 16'((w + 2*p - k) / s + 1);
    c.out_h = 16'((h + 2*p - k) / s + 1);
    c.ifm_base = IFM_B; c.wt_base = WT_B; c.ofm_base = OFM_B; c.res_base = RES_B;
    return c;
  endfunction

  // ---------------- watchdog ----------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_cfg_t c;
    cfg = '0;
    for (int i = 0; i < int'(WORDS); i++) u_mem.mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1: 3x3 conv, pad 1, ReLU, 6 output channels (second group half empty),
    //    no back-pressure: check the one-word-per-cycle rate
    fill(IFM_B, 2*6*7, 3); fill(WT_B, 6*2*9, 3); clear_ofm();
    c = conv_cfg(7, 6, 2, 6, 3, 1, 1, R); c.relu_en = 1;
    run_layer(c, 20000);
    checks++;
    if (last_pop - first_pop + 1 != pops) begin
      failures++;
      $display("FAIL rate: %0d words shifted in %0d cycles", pops, last_pop - first_pop + 1);
    end
    check_conv(c);
    n_partial += (int'(c.out_w) % int'(R) != 0) ? 1 : 0;

    // 1b: 1x1 conv, one input group: outputs come faster than the write-back
    //     kernel takes them, so the array must stall
    fill(IFM_B, 1*4*9, 3); fill(WT_B, 4*1, 3); clear_ofm();
    c = conv_cfg(9, 4, 1, 4, 1, 1, 0, R); c.relu_en = 1;
    run_layer(c, 20000);
    check_conv(c);

    // 2: 3x3 conv layer with random memory back-pressure
    fill(IFM_B, 2*6*7, 3); fill(WT_B, 6*2*9, 3);
    c = conv_cfg(7, 6, 2, 6, 3, 1, 1, R); c.relu_en = 1;
    stall_en = 1; clear_ofm();
    run_layer(c, 40000);
    check_conv(c);

    // 3: 3x3 stride-2 conv with ELTWISE, no ReLU
    fill(RES_B, 400, 3); clear_ofm();
    c = conv_cfg(9, 7, 2, 4, 3, 2, 0, R); c.elt_en = 1;
    run_layer(c, 40000);
    check_conv(c);
    n_stride++;

    // 4: fully connected layer, batch of 2 images (rw = 2), 3 input groups, 5 outputs
    fill(IFM_B, 3*1*2, 3); fill(WT_B, 5*3, 3); clear_ofm();
    c = conv_cfg(2, 1, 3, 5, 1, 1, 0, 2); c.relu_en = 1;
    run_layer(c, 40000);
    check_conv(c);
    n_batch++;

    // 5: fully connected, no batching (rw = 1)
    c = conv_cfg(1, 1, 3, 5, 1, 1, 0, 1);
    clear_ofm();
    run_layer(c, 40000);
    check_conv(c);
    n_fc1++;

    // 6: 3x3 stride-2 max pooling with padding 1
    fill(IFM_B, 2*7*7, 3); clear_ofm();
    c = '0; c.op = OP_POOL; c.in_w = 7; c.in_h = 7; c.in_cg = 2; c.k = 3; c.stride = 2; c.pad = 1;
    c.out_w = 4; c.out_h = 4; c.ifm_base = IFM_B; c.ofm_base = OFM_B;
    run_layer(c, 80000);
    check_pool(c);
    n_maxpool++;

    // 7: 2x2 stride-2 average pooling
    c.pool_avg = 1; c.pool_scale = 32'h3E800000; c.k = 2; c.pad = 0; c.out_w = 3; c.out_h = 3;
    clear_ofm();
    run_layer(c, 80000);
    check_pool(c);
    n_avgpool++;

    // every mechanism must have happened
    $display("events: stall=%0d pad=%0d partial=%0d eltwise=%0d relu=%0d batch=%0d stride=%0d mask=%0d maxpool=%0d avgpool=%0d fc1=%0d groups=%0d",
             n_stall, n_pad, n_partial, n_elt, n_relu, n_batch, n_stride, n_mask, n_maxpool, n_avgpool, n_fc1, n_groups);
    begin
      int ev [12];
      ev = '{n_stall, n_pad, n_partial, n_elt, n_relu, n_batch, n_stride, n_mask,
                      n_maxpool, n_avgpool, n_fc1, n_groups};
      foreach (ev[i]) begin
        checks++;
        if (ev[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
