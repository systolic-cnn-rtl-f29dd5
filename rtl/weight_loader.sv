// weight_loader: moves the weights of one output-channel group from
// off-chip memory into the PE weight caches (paper Sec. 3.6).
//
// The paper loads weights PE by PE in sequence rather than to all PEs in
// parallel, to avoid a wide, high-fan-out load unit.  Here one read port
// streams, for PE p = 0..np-1, its NV = CG*c*c weight words (all channel
// groups and kernel taps of output channel group*PE_NUM + p) and writes each
// returned word into that PE's cache at address v.  PEs past the last output
// channel are not loaded.  Requests issue back to back (one per cycle when
// rd_req_ready is high); responses arrive in order and are written as they
// come, so the loader needs no data buffer.
//
// Interface: start with grp (output-channel group index) begins a load;
// done is high when idle and all words are written.  Weight word of output
// channel o, index v sits at cfg.wt_base + o*NV + v.  One PE-select/address/
// data write bus goes to conv_engine.  Taken from the paper: sequential,
// per-PE loading into PE-local caches; the rest is this design's choice.
//
// Lint: the layer configuration is one struct shared by all kernels;
// the fields this kernel does not need are reported as unused bits.
// Lint: -Wall reports the scnn_pkg constants this module does not use
// (UNUSEDPARAM); they are shared defaults for other modules.
module weight_loader
  import scnn_pkg::*;
#(
  parameter int unsigned PE_NUM  = PE_NUM_DEF,
  parameter int unsigned VEC_FAC = VEC_FAC_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [15:0]          grp,
  input  layer_cfg_t           cfg,
  output logic                 done,
  output logic                 rd_req_valid,
  output addr_t                rd_req_addr,
  input  logic                 rd_req_ready,
  input  logic                 rd_resp_valid,
  input  fp32_t [VEC_FAC-1:0]  rd_resp_data,
  output logic                 wr_en,
  output logic [7:0]           wr_pe,
  output logic [15:0]          wr_addr,
  output fp32_t [VEC_FAC-1:0]  wr_data
);
  logic        iss, rcv;
  logic [15:0] nv, np;
  logic [15:0] pi, vi, pr, vr;
  logic [31:0] oc0;

  assign rd_req_valid = iss;
  assign rd_req_addr  = cfg.wt_base + addr_t'((oc0 + 32'(pi)) * 32'(nv) + 32'(vi));
  assign done         = !iss && !rcv && !wr_en && !start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iss <= 1'b0; rcv <= 1'b0;
      nv <= '0; np <= '0; oc0 <= '0;
      pi <= '0; vi <= '0; pr <= '0; vr <= '0;
      wr_en <= 1'b0; wr_pe <= '0; wr_addr <= '0; wr_data <= '0;
    end else begin
      wr_en <= 1'b0;
      if (start) begin
        nv  <= 16'(cfg.in_cg * 16'(cfg.k) * 16'(cfg.k));
        oc0 <= 32'(grp) * PE_NUM;
        np  <= (32'(cfg.out_c) - 32'(grp) * PE_NUM >= PE_NUM) ? 16'(PE_NUM)
                                                               : 16'(cfg.out_c - grp * 16'(PE_NUM));
        pi <= '0; vi <= '0; pr <= '0; vr <= '0;
        iss <= 1'b1; rcv <= 1'b1;
      end else begin
        if (iss && rd_req_ready) begin
          if (vi + 16'd1 < nv) vi <= vi + 16'd1;
          else begin
            vi <= '0;
            pi <= pi + 16'd1;
            if (pi + 16'd1 >= np) iss <= 1'b0;
          end
        end
        if (rcv && rd_resp_valid) begin
          wr_en   <= 1'b1;
          wr_pe   <= 8'(pr);
          wr_addr <= vr;
          wr_data <= rd_resp_data;
          if (vr + 16'd1 < nv) vr <= vr + 16'd1;
          else begin
            vr <= '0;
            pr <= pr + 16'd1;
            if (pr + 16'd1 >= np) rcv <= 1'b0;
          end
        end
      end
    end
  end
endmodule
