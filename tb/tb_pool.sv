// tb_pool: checks the pooling kernel (VEC_FAC=4) with a behavioural memory
// and random back-pressure: 3x3 stride-2 max pooling with a one-pixel
// border, 2x2 stride-2 max pooling, and 2x2 average pooling (scale 1/4),
// over two channel groups.  Each output word is compared with a reference
// that takes the maximum (or the sum times the scale) of the in-map taps in
// the same order.
module tb_pool;
  import scnn_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned V = 4;

  logic clk = 0, rst_n = 1, start = 0, done;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset
  layer_cfg_t cfg;
  logic stall_en = 1;
  logic [0:0] rq_v, rq_r, rs_v;
  logic [0:0][31:0] rq_a;
  logic [0:0][V*32-1:0] rs_d;
  logic wv, wr_r;
  addr_t wa;
  fp32_t [V-1:0] wd;
  logic [V-1:0] wm;
  always #5 clk = ~clk;

  pool #(.VEC_FAC(V)) dut (
    .clk, .rst_n, .start, .cfg, .done,
    .rd_req_valid(rq_v[0]), .rd_req_addr(rq_a[0]), .rd_req_ready(rq_r[0]),
    .rd_resp_valid(rs_v[0]), .rd_resp_data(rs_d[0]),
    .wr_valid(wv), .wr_addr(wa), .wr_data(wd), .wr_mask(wm), .wr_ready(wr_r)
  );
  dram_model #(.VEC_FAC(V), .WORDS(512), .NRD(1), .LAT(3)) u_mem (
    .clk, .stall_en, .req_valid(rq_v), .req_addr(rq_a), .req_ready(rq_r),
    .resp_valid(rs_v), .resp_data(rs_d),
    .wr_valid(wv), .wr_addr(wa), .wr_data(wd), .wr_mask(wm), .wr_ready(wr_r)
  );

  int checks = 0, failures = 0;

  task automatic check(layer_cfg_t c);
    for (int g = 0; g < int'(c.in_cg); g++)
      for (int y = 0; y < int'(c.out_h); y++)
        for (int x = 0; x < int'(c.out_w); x++)
          for (int v = 0; v < int'(V); v++) begin
            fp32_t acc, got, d;
            bit    fst;
            int    iy, ix;
            acc = 0; fst = 1;
            for (int py = 0; py < int'(c.k); py++)
              for (int px = 0; px < int'(c.k); px++) begin
                iy = y * int'(c.stride) + py - int'(c.pad);
                ix = x * int'(c.stride) + px - int'(c.pad);
                if (iy >= 0 && iy < int'(c.in_h) && ix >= 0 && ix < int'(c.in_w)) begin
                  d = u_mem.mem[int'(c.ifm_base) + (g * int'(c.in_h) + iy) * int'(c.in_w) + ix][v*32 +: 32];
                  acc = fst ? d : (c.pool_avg ? fadd(acc, d) : fmax(acc, d));
                  fst = 0;
                end
              end
            if (c.pool_avg) acc = fmul(acc, c.pool_scale);
            got = u_mem.mem[int'(c.ofm_base) + (g * int'(c.out_h) + y) * int'(c.out_w) + x][v*32 +: 32];
            checks++;
            if (got !== acc) begin
              failures++;
              if (failures < 10) $display("FAIL g=%0d y=%0d x=%0d v=%0d got=%h exp=%h", g, y, x, v, got, acc);
            end
          end
  endtask

  task automatic run(layer_cfg_t c);
    int t = 0;
    cfg = c;
    for (int i = 0; i < 200; i++) u_mem.mem[int'(c.ofm_base) + i] = '0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done && t < 50000) begin @(negedge clk); t++; end
    repeat (3) @(negedge clk);
    checks++;
    if (!done) begin failures++; $display("FAIL pool did not finish"); end
    check(c);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_cfg_t c;
    cfg = '0;
    for (int i = 0; i < 512; i++)
      for (int v = 0; v < int'(V); v++) u_mem.mem[i][v*32 +: 32] = frand(3);
    repeat (2) @(negedge clk);
    rst_n = 1;
    c = '0; c.op = OP_POOL; c.in_w = 7; c.in_h = 6; c.in_cg = 2; c.k = 3; c.stride = 2; c.pad = 1;
    c.out_w = 4; c.out_h = 3; c.ifm_base = 0; c.ofm_base = 200;
    run(c);
    c.k = 2; c.pad = 0; c.out_w = 3; c.out_h = 3;
    run(c);
    c.pool_avg = 1; c.pool_scale = 32'h3E800000;
    run(c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
