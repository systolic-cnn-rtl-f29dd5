// dram_model: behavioural model of the off-chip memory, for simulation
// only (behavioural_model; the real part is the board's DDR4 and its
// controller).
//
// WORDS words of VEC_FAC x 32 bits.  NRD read ports: a request is taken when
// req_valid and req_ready are both high, and its data returns on resp_valid
// LAT cycles later, in order.  One write port with a lane mask.  When
// stall_en is high the ready outputs drop at random (about one cycle in
// four) to exercise back-pressure.  Testbenches reach mem directly to load
// and inspect it.
module dram_model #(
  parameter int unsigned VEC_FAC = 16,
  parameter int unsigned WORDS   = 4096,
  parameter int unsigned NRD     = 3,
  parameter int unsigned LAT     = 4
) (
  input  logic                          clk,
  input  logic                          stall_en,
  input  logic [NRD-1:0]                req_valid,
  input  logic [NRD-1:0][31:0]          req_addr,
  output logic [NRD-1:0]                req_ready,
  output logic [NRD-1:0]                resp_valid,
  output logic [NRD-1:0][VEC_FAC*32-1:0] resp_data,
  input  logic                          wr_valid,
  input  logic [31:0]                   wr_addr,
  input  logic [VEC_FAC*32-1:0]         wr_data,
  input  logic [VEC_FAC-1:0]            wr_mask,
  output logic                          wr_ready
);
  logic [VEC_FAC*32-1:0] mem [WORDS];
  longint unsigned cyc = 0;
  longint unsigned due_q [NRD][$];
  logic [VEC_FAC*32-1:0] dat_q [NRD][$];

  initial begin
    req_ready  = '1;
    wr_ready   = 1'b1;
    resp_valid = '0;
    resp_data  = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int p = 0; p < int'(NRD); p++) begin
      if (req_valid[p] && req_ready[p]) begin
        if (req_addr[p] >= WORDS) $error("dram_model: read address %0d out of range", req_addr[p]);
        due_q[p].push_back(cyc + LAT);
        dat_q[p].push_back(mem[req_addr[p] % WORDS]);
      end
      resp_valid[p] <= 1'b0;
      if (due_q[p].size() > 0 && due_q[p][0] <= cyc) begin
        void'(due_q[p].pop_front());
        resp_valid[p] <= 1'b1;
        resp_data[p]  <= dat_q[p].pop_front();
      end
      req_ready[p] <= !stall_en || ($urandom_range(0, 3) != 0);
    end
    if (wr_valid && wr_ready) begin
      if (wr_addr >= WORDS) $error("dram_model: write address %0d out of range", wr_addr);
      for (int i = 0; i < int'(VEC_FAC); i++)
        if (wr_mask[i]) mem[wr_addr % WORDS][i*32 +: 32] <= wr_data[i*32 +: 32];
    end
    wr_ready <= !stall_en || ($urandom_range(0, 3) != 0);
  end
endmodule
