// tb_mem_write: checks the write-back kernel with PE_NUM=2 and VEC_FAC=4,
// so groups land in lanes 0-1 or 2-3 of an output word.  Random output
// vectors are offered whenever the kernel has space, with random memory
// back-pressure, for plain, ReLU, ELTWISE and ELTWISE+ReLU layers with 3
// output channels (the second group's upper lane is masked).  Every written
// word is compared in address, data and mask with a reference that adds the
// residual word and clamps negatives; the FIFO must fill (space low) at
// least once and every pixel must be written once.
module tb_mem_write;
  import scnn_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned P = 2, V = 4;

  logic clk = 0, rst_n = 1, start = 0, grp_done;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset
  logic [15:0] grp = 0;
  layer_cfg_t cfg;
  logic stall_en = 1;
  logic in_valid = 0, space;
  fp32_t [P-1:0] in_data;
  logic [0:0] rq_v, rq_r, rs_v;
  logic [0:0][31:0] rq_a;
  logic [0:0][V*32-1:0] rs_d;
  logic wv, wr_r;
  addr_t wa;
  fp32_t [V-1:0] wd;
  logic [V-1:0] wm;
  always #5 clk = ~clk;

  mem_write #(.PE_NUM(P), .VEC_FAC(V), .DEPTH(4)) dut (
    .clk, .rst_n, .start, .grp, .cfg, .grp_done, .in_valid, .in_data, .space,
    .rd_req_valid(rq_v[0]), .rd_req_addr(rq_a[0]), .rd_req_ready(rq_r[0]),
    .rd_resp_valid(rs_v[0]), .rd_resp_data(rs_d[0]),
    .wr_valid(wv), .wr_addr(wa), .wr_data(wd), .wr_mask(wm), .wr_ready(wr_r)
  );
  dram_model #(.VEC_FAC(V), .WORDS(256), .NRD(1), .LAT(3)) u_mem (
    .clk, .stall_en, .req_valid(rq_v), .req_addr(rq_a), .req_ready(rq_r),
    .resp_valid(rs_v), .resp_data(rs_d),
    .wr_valid(1'b0), .wr_addr(32'd0), .wr_data('0), .wr_mask('0), .wr_ready()
  );
  assign wr_r = rq_r[0];

  int checks = 0, failures = 0, nfull = 0, nw = 0;
  fp32_t [P-1:0] sent_q[$];

  always @(posedge clk) begin
    if (rst_n && !space) nfull++;
    if (rst_n && wv && wr_r) begin
      fp32_t [P-1:0] d;
      int pix, lo, cgo;
      d   = sent_q.pop_front();
      pix = nw;
      cgo = (int'(grp) * int'(P)) / int'(V);
      lo  = (int'(grp) * int'(P)) % int'(V);
      checks++;
      if (int'(wa) != int'(cfg.ofm_base) + cgo * 6 + pix) begin
        failures++; $display("FAIL address %0d", wa);
      end
      for (int n = 0; n < int'(P); n++) begin
        fp32_t e;
        bit    m;
        e = d[n];
        if (cfg.elt_en) e = fadd(e, u_mem.mem[int'(cfg.res_base) + cgo * 6 + pix][(lo + n)*32 +: 32]);
        if (cfg.relu_en && e[31]) e = 0;
        m = (int'(grp) * int'(P) + n < int'(cfg.out_c));
        checks++;
        if (wm[lo + n] != m || (m && wd[lo + n] !== e)) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d got %h/%0d exp %h/%0d", lo + n, wd[lo + n], wm[lo + n], e, m);
        end
      end
      for (int i = 0; i < int'(V); i++)
        if ((i < lo || i >= lo + int'(P)) && wm[i]) begin
          failures++; $display("FAIL mask outside the group's lanes");
        end
      nw++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sent, t;
    cfg = '0; in_data = '0;
    cfg.out_w = 3; cfg.out_h = 2; cfg.out_c = 3; cfg.ofm_base = 10; cfg.res_base = 100;
    for (int i = 0; i < 256; i++)
      for (int v = 0; v < int'(V); v++) u_mem.mem[i][v*32 +: 32] = frand(3);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 4; mode++) begin
      cfg.relu_en = mode[0];
      cfg.elt_en  = mode[1];
      for (int g = 0; g < 2; g++) begin
        grp = 16'(g); nw = 0; sent = 0; t = 0;
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        while (sent < 6 && t < 2000) begin
          in_valid = 1;
          for (int n = 0; n < int'(P); n++) in_data[n] = frand(3);
          if (space) begin sent_q.push_back(in_data); sent++; end
          @(negedge clk); t++;
        end
        in_valid = 0;
        while (!grp_done && t < 4000) begin @(negedge clk); t++; end
        checks++;
        if (!grp_done || nw != 6) begin failures++; $display("FAIL group not completed (%0d)", nw); end
      end
    end
    checks++;
    if (nfull == 0) begin failures++; $display("FAIL FIFO never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
