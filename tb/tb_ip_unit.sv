// tb_ip_unit: checks one inner-product unit at VEC_FAC = 16.
// Random blocks of 1..6 terms are fed with random bubbles (comp low) and
// random stalls (en low).  Each result is compared with a reference that
// multiplies, reduces in the same pairwise tree order and accumulates, and
// its latency must be 2 + log2(VEC_FAC) enabled cycles after the last term.
module tb_ip_unit;
  import scnn_pkg::*;
  import fp_ref_pkg::*;
  localparam int unsigned V = 16;
  localparam int unsigned LAT = 2 + $clog2(V);

  logic clk = 0, rst_n = 1, en = 0, comp = 0, first = 0, last = 0;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset
  fp32_t [V-1:0] ifm, w;
  logic res_valid;
  fp32_t res;
  always #5 clk = ~clk;

  ip_unit #(.VEC_FAC(V)) dut (.*);

  int checks = 0, failures = 0;
  fp32_t exp_q[$];
  int    due_q[$];
  int    en_cyc = 0;      // enabled cycles so far

  function automatic fp32_t term(fp32_t [V-1:0] a, fp32_t [V-1:0] b);
    fp32_t t [V];
    int n = int'(V);
    for (int i = 0; i < int'(V); i++) t[i] = fmul(a[i], b[i]);
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++) t[i] = fadd(t[2*i], t[2*i+1]);
      n /= 2;
    end
    return t[0];
  endfunction

  // output monitor
  always @(posedge clk) begin
    if (rst_n && en) begin
      en_cyc <= en_cyc + 1;
      if (res_valid) begin
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected result"); end
        else begin
          fp32_t e;
          int    d;
          e = exp_q.pop_front();
          d = due_q.pop_front();
          if (res !== e) begin failures++; $display("FAIL res=%h exp=%h", res, e); end
          checks++;
          if (en_cyc != d) begin failures++; $display("FAIL latency: at %0d expected %0d", en_cyc, d); end
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t acc, t;
    int n;
    ifm = '0; w = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 200; b++) begin
      n = $urandom_range(1, 6);
      for (int i = 0; i < n; i++) begin
        // random bubbles and stalls before each term
        while ($urandom_range(0, 3) == 0) begin
          en = 1'($urandom_range(0, 1)); comp = 0; first = 0; last = 0;
          @(negedge clk);
        end
        en = 1; comp = 1; first = (i == 0); last = (i == n - 1);
        for (int v = 0; v < int'(V); v++) begin ifm[v] = frand(3); w[v] = frand(3); end
        t = term(ifm, w);
        acc = (i == 0) ? t : fadd(acc, t);
        if (last) begin
          exp_q.push_back(acc);
          due_q.push_back(en_cyc + int'(LAT));
        end
        @(negedge clk);
      end
    end
    en = 1; comp = 0; first = 0; last = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
