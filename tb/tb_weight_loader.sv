// tb_weight_loader: checks the sequential weight loader (PE_NUM=4,
// VEC_FAC=4) against a behavioural memory with random back-pressure.
// For each output-channel group of a layer with 10 output channels (the
// last group has only two), every cache write must go to the right PE and
// address with the weight word of that output channel and tap, each word
// exactly once, PEs in order; PEs past the last channel get nothing.
module tb_weight_loader;
  import scnn_pkg::*;
  localparam int unsigned P = 4, V = 4;

  logic clk = 0, rst_n = 1, start = 0, done;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset
  logic [15:0] grp = 0;
  layer_cfg_t cfg;
  logic stall_en = 1;
  logic [0:0] rq_v, rq_r, rs_v;
  logic [0:0][31:0] rq_a;
  logic [0:0][V*32-1:0] rs_d;
  logic wr_en;
  logic [7:0] wr_pe;
  logic [15:0] wr_addr;
  fp32_t [V-1:0] wr_data;
  always #5 clk = ~clk;

  weight_loader #(.PE_NUM(P), .VEC_FAC(V)) dut (
    .clk, .rst_n, .start, .grp, .cfg, .done,
    .rd_req_valid(rq_v[0]), .rd_req_addr(rq_a[0]), .rd_req_ready(rq_r[0]),
    .rd_resp_valid(rs_v[0]), .rd_resp_data(rs_d[0]),
    .wr_en, .wr_pe, .wr_addr, .wr_data
  );
  dram_model #(.VEC_FAC(V), .WORDS(1024), .NRD(1), .LAT(5)) u_mem (
    .clk, .stall_en, .req_valid(rq_v), .req_addr(rq_a), .req_ready(rq_r),
    .resp_valid(rs_v), .resp_data(rs_d),
    .wr_valid(1'b0), .wr_addr(32'd0), .wr_data('0), .wr_mask('0), .wr_ready()
  );

  int checks = 0, failures = 0;
  int nwr, exp_pe, exp_a, nv;

  always @(posedge clk) begin
    if (rst_n && wr_en) begin
      int oc;
      oc = int'(grp) * int'(P) + exp_pe;
      checks++;
      if (int'(wr_pe) != exp_pe || int'(wr_addr) != exp_a ||
          wr_data !== u_mem.mem[int'(cfg.wt_base) + oc * nv + exp_a]) begin
        failures++;
        if (failures < 10) $display("FAIL write pe=%0d a=%0d (exp %0d %0d)", wr_pe, wr_addr, exp_pe, exp_a);
      end
      nwr++;
      exp_a++;
      if (exp_a == nv) begin exp_a = 0; exp_pe++; end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, np;
    cfg = '0;
    cfg.in_cg = 2; cfg.k = 3; cfg.out_c = 10; cfg.wt_base = 100;
    nv = 2 * 3 * 3;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 3; g++) begin
      grp = 16'(g); nwr = 0; exp_pe = 0; exp_a = 0; t = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done && t < 5000) begin @(negedge clk); t++; end
      repeat (10) @(negedge clk);
      np = (10 - g * int'(P) >= int'(P)) ? int'(P) : 10 - g * int'(P);
      checks++;
      if (!done || nwr != np * nv) begin
        failures++;
        $display("FAIL group %0d: %0d writes, expected %0d", g, nwr, np * nv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
