// tb_pe: checks one PE (VEC_FAC=4, REUSE_FAC=3) at run-time widths rw=3
// and rw=2.  The weight cache is filled through the write port, then random
// blocks are driven: random windows, random cache addresses, fill cycles
// without accumulation, random stalls.  The reference computes, for output
// r of a block, the inner products of window entry rw-1-r with the addressed
// weight word, tree-reduced and accumulated in order; the PE must send the
// first nv of them in order.  The forwarding FF must repeat each input one
// enabled cycle later.
module tb_pe;
  import scnn_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned V = 4, R = 3, WB = 16;

  logic clk = 0, rst_n = 1, en = 0;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset
  logic [7:0] rw;
  fp32_t [R-1:0][V-1:0] win_in, win_out;
  win_ctrl_t ctrl_in, ctrl_out;
  logic wr_en = 0;
  logic [15:0] wr_addr = 0;
  fp32_t [V-1:0] wr_data;
  logic out_valid;
  fp32_t out_data;
  always #5 clk = ~clk;

  pe #(.VEC_FAC(V), .REUSE_FAC(R), .WBUF_DEPTH(WB)) dut (.*);

  int checks = 0, failures = 0;
  fp32_t wref [WB][V];
  fp32_t exp_q[$];
  fp32_t [R-1:0][V-1:0] win_prev;
  win_ctrl_t ctrl_prev;

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
      if (out_valid) begin
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
        else begin
          fp32_t e;
          e = exp_q.pop_front();
          if (out_data !== e) begin failures++; $display("FAIL out=%h exp=%h", out_data, e); end
        end
      end
    end
  end

  // forwarding FF check: sampled after the edge
  always @(posedge clk) begin
    if (rst_n && en) begin
      win_prev  <= win_in;
      ctrl_prev <= ctrl_in;
    end
  end
  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (win_out !== win_prev || ctrl_out !== ctrl_prev) begin
        failures++; $display("FAIL forwarding register");
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
    fp32_t acc [R];
    int n, nfill, nv;
    win_in = '0; ctrl_in = '0; rw = R; wr_data = '0;
    win_prev = '0; ctrl_prev = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill the weight cache
    for (int a = 0; a < int'(WB); a++) begin
      wr_en = 1; wr_addr = 16'(a);
      for (int v = 0; v < int'(V); v++) begin wr_data[v] = frand(3); wref[a][v] = wr_data[v]; end
      @(negedge clk);
    end
    wr_en = 0;
    for (int pass = 0; pass < 2; pass++) begin
      rw = (pass == 0) ? 8'(R) : 8'(R - 1);
      for (int b = 0; b < 60; b++) begin
        n     = $urandom_range(1, 5);
        nfill = (n >= int'(rw)) ? 0 : int'(rw) - n;
        nv    = $urandom_range(1, int'(rw));
        for (int i = 0; i < nfill + n; i++) begin
          while ($urandom_range(0, 4) == 0) begin
            en = 0; @(negedge clk);
          end
          en = 1;
          for (int e = 0; e < int'(R); e++)
            for (int v = 0; v < int'(V); v++) win_in[e][v] = frand(3);
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
            for (int r = 0; r < int'(rw); r++) begin
              fp32_t t;
              t = term(win_in[int'(rw) - 1 - r], wref[ctrl_in.waddr]);
              acc[r] = (k == 0) ? t : fadd(acc[r], t);
            end
            if (k == n - 1)
              for (int r = 0; r < nv; r++) exp_q.push_back(acc[r]);
          end
          @(negedge clk);
        end
      end
      en = 1; ctrl_in = '0;
      repeat (20) @(negedge clk);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
