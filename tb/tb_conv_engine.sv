// tb_conv_engine: checks the systolic array (PE_NUM=3, VEC_FAC=4,
// REUSE_FAC=2).  Every PE's cache gets its own weights over the write bus;
// random blocks of windows then enter PE 0 with random stalls.  Each output
// vector must hold, in lane n, the result PE n computes with its own
// weights, all lanes in the same cycle, blocks' outputs in order, and the
// first output of a block must appear PE_NUM + 3 + log2(VEC_FAC) enabled
// cycles after the window that closed the block entered the array.
module tb_conv_engine;
  import scnn_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned P = 3, V = 4, R = 2, WB = 8;
  localparam int unsigned LAT = P + 3 + $clog2(V);

  logic clk = 0, rst_n = 1, en = 0;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset
  logic [7:0] rw = R;
  fp32_t [R-1:0][V-1:0] win_in;
  win_ctrl_t ctrl_in;
  logic wr_en = 0;
  logic [7:0] wr_pe = 0;
  logic [15:0] wr_addr = 0;
  fp32_t [V-1:0] wr_data;
  logic out_valid;
  fp32_t [P-1:0] out_data;
  always #5 clk = ~clk;

  conv_engine #(.PE_NUM(P), .VEC_FAC(V), .REUSE_FAC(R), .WBUF_DEPTH(WB)) dut (.*);

  int checks = 0, failures = 0;
  fp32_t wref [P][WB][V];
  fp32_t [P-1:0] exp_q[$];
  int    due_q[$];
  int    en_cyc = 0;
  bit    first_of_block_q[$];

  function automatic fp32_t term(fp32_t [V-1:0] a, fp32_t b [V]);
    fp32_t t [V];
    int n = int'(V);
    for (int i = 0; i < int'(V); i++) t[i] = fmul(a[i], b[i]);
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) t[i] = fadd(t[2*i], t[2*i+1]);
      n /= 2;
    end
    return t[0];
  endfunction

  always @(posedge clk) begin
    if (rst_n && en) begin
      en_cyc <= en_cyc + 1;
      if (out_valid) begin
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
        else begin
          fp32_t [P-1:0] e;
          int d;
          bit f;
          e = exp_q.pop_front();
          f = first_of_block_q.pop_front();
          for (int n = 0; n < int'(P); n++)
            if (out_data[n] !== e[n]) begin
              failures++; $display("FAIL lane %0d out=%h exp=%h", n, out_data[n], e[n]);
            end
          if (f) begin
            d = due_q.pop_front();
            checks++;
            if (en_cyc != d) begin failures++; $display("FAIL latency %0d vs %0d", en_cyc, d); end
          end
        end
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t acc [P][R];
    fp32_t [P-1:0] e;
    int n, nfill, nv;
    win_in = '0; ctrl_in = '0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < int'(P); p++)
      for (int a = 0; a < int'(WB); a++) begin
        wr_en = 1; wr_pe = 8'(p); wr_addr = 16'(a);
        for (int v = 0; v < int'(V); v++) begin wr_data[v] = frand(3); wref[p][a][v] = wr_data[v]; end
        @(negedge clk);
      end
    wr_en = 0;
    for (int b = 0; b < 80; b++) begin
      n     = $urandom_range(1, 4);
      nfill = (n >= int'(R)) ? 0 : int'(R) - n;
      nv    = $urandom_range(1, int'(R));
      for (int i = 0; i < nfill + n; i++) begin
        while ($urandom_range(0, 4) == 0) begin en = 0; @(negedge clk); end
        en = 1;
        for (int q = 0; q < int'(R); q++)
          for (int v = 0; v < int'(V); v++) win_in[q][v] = frand(3);
        ctrl_in = '0;
        ctrl_in.valid = 1;
        ctrl_in.waddr = 16'($urandom_range(0, WB - 1));
        if (i >= nfill) begin
          int k;
          k = i - nfill;
          ctrl_in.comp  = 1;
          ctrl_in.first = (k == 0);
          ctrl_in.last  = (k == n - 1);
          ctrl_in.nv    = 8'(nv);
          for (int p = 0; p < int'(P); p++)
            for (int r = 0; r < int'(R); r++) begin
              fp32_t t;
              t = term(win_in[int'(R) - 1 - r], wref[p][ctrl_in.waddr]);
              acc[p][r] = (k == 0) ? t : fadd(acc[p][r], t);
            end
          if (k == n - 1) begin
            for (int r = 0; r < nv; r++) begin
              for (int p = 0; p < int'(P); p++) e[p] = acc[p][r];
              exp_q.push_back(e);
              first_of_block_q.push_back(r == 0);
            end
            due_q.push_back(en_cyc + int'(LAT));
          end
        end
        @(negedge clk);
      end
    end
    en = 1; ctrl_in = '0;
    repeat (30) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
