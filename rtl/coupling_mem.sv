// coupling_mem -- weight and bias store of the p-computer.
//
// Holds, for each of N p-bits, the DEG = 6 weights J to its Chimera
// neighbours (slots 0..5, numbering in pbit_pkg) and its bias h (slot 6).
// Every synapse reads all of its weights at the same time, so the store is
// a bank of registers with all words on the outputs, not a RAM. The host
// writes one word per master-clock cycle: cfg_addr = {p-bit index, 3-bit
// slot}, data in cfg_wdata, strobe cfg_we; the new value is visible on the
// next cycle. Writes to slot 7 or to an index >= N are ignored. The host
// writes J_ij and J_ji separately (the matrix is symmetric). Reset clears
// every word, so p-bits that a problem does not use are left uncoupled.
// The paper only states that J and h are the problem's weights and biases;
// this load port and address map are this design's choices.
module coupling_mem
  import pbit_pkg::*;
#(
  parameter int N      = 800,
  parameter int ADDR_W = $clog2(N) + SLOT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [ADDR_W-1:0] cfg_addr,
  input  weight_t           cfg_wdata,
  output weight_t           j_all [N][DEG],
  output weight_t           h_all [N]
);
  logic [ADDR_W-SLOT_W-1:0] widx;
  logic [SLOT_W-1:0]        wslot;
  assign widx  = cfg_addr[ADDR_W-1:SLOT_W];
  assign wslot = cfg_addr[SLOT_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        h_all[i] <= '0;
        for (int s = 0; s < DEG; s++) j_all[i][s] <= '0;
      end
    end else if (cfg_we && (int'(widx) < N)) begin
      if (int'(wslot) < DEG)          j_all[widx][wslot] <= cfg_wdata;
      else if (int'(wslot) == SLOT_H) h_all[widx]        <= cfg_wdata;
    end
  end
endmodule
