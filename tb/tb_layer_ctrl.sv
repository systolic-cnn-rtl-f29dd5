// tb_layer_ctrl: checks the layer sequencer with simple responders in
// place of the kernels (each reports done a random number of cycles after
// its start pulse).  A convolution layer with 10 output channels and
// PE_NUM=4 must run three groups, each as weight load, then IFM pass and
// write-back started together, in that order, with grp counting 0,1,2, and
// end with one done pulse; a pooling layer must start only the pool kernel.
module tb_layer_ctrl;
  import scnn_pkg::*;
  localparam int unsigned P = 4;

  logic clk = 0, rst_n = 1, start = 0, busy, done;
  initial #1 rst_n = 0;   // falling edge applies the asynchronous reset
  layer_cfg_t cfg;
  logic [15:0] grp;
  logic wl_start, rd_start, wb_start, pool_start;
  logic wl_done, rd_done, wb_done, pool_done;
  always #5 clk = ~clk;

  layer_ctrl #(.PE_NUM(P)) dut (.*);

  // responder: done goes low on start and returns after a random delay
  int wl_t = 0, rd_t = 0, wb_t = 0, pl_t = 0;
  always @(posedge clk) begin
    wl_t <= wl_start ? $urandom_range(2, 9) : (wl_t > 0 ? wl_t - 1 : 0);
    rd_t <= rd_start ? $urandom_range(2, 9) : (rd_t > 0 ? rd_t - 1 : 0);
    wb_t <= wb_start ? $urandom_range(2, 9) : (wb_t > 0 ? wb_t - 1 : 0);
    pl_t <= pool_start ? $urandom_range(2, 9) : (pl_t > 0 ? pl_t - 1 : 0);
  end
  assign wl_done   = (wl_t == 0) && !wl_start;
  assign rd_done   = (rd_t == 0) && !rd_start;
  assign wb_done   = (wb_t == 0) && !wb_start;
  assign pool_done = (pl_t == 0) && !pool_start;

  int checks = 0, failures = 0;
  string ev_q[$];
  int    ndone = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (wl_start)   ev_q.push_back($sformatf("W%0d", grp));
      if (rd_start)   ev_q.push_back($sformatf("R%0d%0d", grp, wb_start));
      if (pool_start) ev_q.push_back("P");
      if (wl_start && (wb_t != 0 || rd_t != 0)) begin
        failures++; $display("FAIL weight load while a group is still computing");
      end
      if (done) ndone++;
    end
  end

  task automatic run_and_expect(layer_cfg_t c, string exp [$]);
    int t = 0;
    cfg = c; ev_q.delete(); ndone = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy && t < 2000) begin @(negedge clk); t++; end
    repeat (3) @(negedge clk);
    checks++;
    if (ev_q.size() != exp.size()) begin
      failures++; $display("FAIL %0d events, expected %0d", ev_q.size(), exp.size());
    end else
      foreach (exp[i]) begin
        checks++;
        if (ev_q[i] != exp[i]) begin failures++; $display("FAIL event %0d: %s vs %s", i, ev_q[i], exp[i]); end
      end
    checks++;
    if (ndone != 1 || busy) begin failures++; $display("FAIL done pulses %0d", ndone); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_cfg_t c;
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    c = '0; c.op = OP_CONV; c.out_c = 10;
    run_and_expect(c, '{"W0", "R01", "W1", "R11", "W2", "R21"});
    c.out_c = 4;
    run_and_expect(c, '{"W0", "R01"});
    c.op = OP_POOL;
    run_and_expect(c, '{"P"});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
