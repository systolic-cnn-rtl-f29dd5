// conv_engine: the convolution engine, a 1-D systolic array of PE_NUM PEs
// (paper Fig. 2, "CONV").
//
// The IFM window from the shift-register buffer enters PE 0 and moves one PE
// per cycle down the chain, so every PE works on the same input data, one
// cycle apart, each against the weights of a different output channel: PE n
// produces OFM channel (group*PE_NUM + n).  Weights reach the PE caches over a
// single write bus with a PE select (loaded one PE after another, as the
// paper's sequential weight loading does).  The OFM streams leave the PEs one
// cycle apart; a deskew delay of PE_NUM-1-n cycles on lane n lines them up,
// so the engine outputs one PE_NUM-channel vector per output pixel.
//
// Taken from the paper: the 1-D chain of PE_NUM PEs, shared shifted IFM,
// per-PE output channel.  This design's choices: the write bus and the
// deskew registers.  All state advances only on enabled cycles (en), which
// is how the downstream write-back stalls the whole engine.  Latency from a
// window with last entering PE 0 to the first output vector:
// PE_NUM + 3 + log2(VEC_FAC) enabled cycles.
//
// Lint: the window and control forwarded by the last PE have no
// receiver (UNUSEDSIGNAL on the top slices of win/ctl), as in the paper's
// chain, which ends at PE_n.
// Lint: SYNCASYNCNET on rst_n is expected: besides resetting the flops
// asynchronously, rst_n disables the assertions (disable iff), which the
// linter counts as a synchronous use; no flop samples it.
// Lint: -Wall reports the scnn_pkg constants this module does not use
// (UNUSEDPARAM); they are shared defaults for other modules.
module conv_engine
  import scnn_pkg::*;
#(
  parameter int unsigned PE_NUM     = PE_NUM_DEF,
  parameter int unsigned VEC_FAC    = VEC_FAC_DEF,
  parameter int unsigned REUSE_FAC  = REUSE_FAC_DEF,
  parameter int unsigned WBUF_DEPTH = WBUF_DEPTH_DEF
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                en,
  input  logic [7:0]                          rw,
  input  fp32_t [REUSE_FAC-1:0][VEC_FAC-1:0]  win_in,
  input  win_ctrl_t                           ctrl_in,
  input  logic                                wr_en,
  input  logic [7:0]                          wr_pe,
  input  logic [15:0]                         wr_addr,
  input  fp32_t [VEC_FAC-1:0]                 wr_data,
  output logic                                out_valid,
  output fp32_t [PE_NUM-1:0]                  out_data
);
  fp32_t [PE_NUM:0][REUSE_FAC-1:0][VEC_FAC-1:0] win;
  win_ctrl_t [PE_NUM:0]                         ctl;
  logic  [PE_NUM-1:0]                           pv;
  fp32_t [PE_NUM-1:0]                           pd;
  logic  [PE_NUM-1:0]                           dv;

  assign win[0] = win_in;
  assign ctl[0] = ctrl_in;

  for (genvar n = 0; n < PE_NUM; n++) begin : g_pe
    pe #(.VEC_FAC(VEC_FAC), .REUSE_FAC(REUSE_FAC), .WBUF_DEPTH(WBUF_DEPTH)) u_pe (
      .clk, .rst_n, .en, .rw,
      .win_in  (win[n]),
      .ctrl_in (ctl[n]),
      .win_out (win[n+1]),
      .ctrl_out(ctl[n+1]),
      .wr_en   (wr_en && (wr_pe == 8'(n))),
      .wr_addr, .wr_data,
      .out_valid(pv[n]),
      .out_data (pd[n])
    );

    // deskew: lane n waits PE_NUM-1-n cycles
    localparam int unsigned D = PE_NUM - 1 - n;
    if (D == 0) begin : g_nod
      assign dv[n]       = pv[n];
      assign out_data[n] = pd[n];
    end else begin : g_d
      logic  [D-1:0] sv;
      fp32_t [D-1:0] sd;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          sv <= '0;
          sd <= '0;
        end else if (en) begin
          sv[0] <= pv[n];
          sd[0] <= pd[n];
          for (int i = 1; i < int'(D); i++) begin
            sv[i] <= sv[i-1];
            sd[i] <= sd[i-1];
          end
        end
      end
      assign dv[n]       = sv[D-1];
      assign out_data[n] = sd[D-1];
    end
  end

  assign out_valid = dv[PE_NUM-1];

  // the deskewed lanes must agree
  a_lanes: assert property (@(posedge clk) disable iff (!rst_n) (dv == '0 || dv == '1))
    else $error("conv_engine: lanes out of step");
endmodule
