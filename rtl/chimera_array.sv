// chimera_array -- the p-bits and synapses of the p-computer, wired as a
// ROWS x COLS-tile Chimera lattice (8 spins per tile, 800 spins at 10 x 10).
//
// Spin i has a synapse that sums J*m over its Chimera neighbours (wiring
// from pbit_pkg::chimera_nbr) plus h, and a p-bit clocked by one of the
// N_ROSC ring-oscillator clocks. Following the paper, clocks are spread
// evenly over the spins and no clock drives spins of both halves of the
// bipartite lattice, so two coupled spins never share a clock edge
// systematically. Here partition 0 uses the even-numbered clocks and
// partition 1 the odd ones, dealt round-robin (pbit_pkg::clock_of); that
// particular deal is this design's choice.
//
// Nothing else synchronises the spins: a p-bit reads its neighbours' states
// through its synapse whenever its own clock rises, even if a neighbour is
// switching at that moment. The run enable comes from the master-clock
// domain and passes a two-flop synchroniser in each clock domain; beta and
// the weights change only between trials and are used unsynchronised.
//
// Ports: rosc_clks (p-bit clocks), rst_n, run, beta, j_all/h_all (weights
// from coupling_mem), m (spin states, 1 = +1).
module chimera_array
  import pbit_pkg::*;
#(
  parameter int ROWS   = 10,
  parameter int COLS   = 10,
  parameter int N_ROSC = 10,
  parameter int N      = ROWS * COLS * TILE
) (
  input  logic [N_ROSC-1:0] rosc_clks,
  input  logic              rst_n,
  input  logic              run,
  input  beta_t             beta,
  input  weight_t           j_all [N][DEG],
  input  weight_t           h_all [N],
  output logic [N-1:0]      m
);
  // run, synchronised into each clock domain
  logic [N_ROSC-1:0] run_s;

  for (genvar k = 0; k < N_ROSC; k++) begin : g_sync
    logic [1:0] sync;
    always_ff @(posedge rosc_clks[k] or negedge rst_n) begin
      if (!rst_n) sync <= '0;
      else        sync <= {sync[0], run};
    end
    assign run_s[k] = sync[1];
  end

  for (genvar i = 0; i < N; i++) begin : g_spin
    localparam int CK = clock_of(i, COLS, N_ROSC);
    logic [DEG-1:0] m_nbr;
    logic [DEG-1:0] nvalid;
    field_t         fld;

    for (genvar s = 0; s < DEG; s++) begin : g_nbr
      localparam int NB = chimera_nbr(i, s, ROWS, COLS);
      if (NB >= 0) begin : g_on
        assign m_nbr[s]  = m[NB];
        assign nvalid[s] = 1'b1;
      end else begin : g_off
        assign m_nbr[s]  = 1'b0;
        assign nvalid[s] = 1'b0;
      end
    end

    synapse u_syn (
      .m_nbr(m_nbr), .j_w(j_all[i]), .h(h_all[i]),
      .nbr_valid(nvalid), .i_field(fld)
    );

    pbit #(.SEED(seed_of(i))) u_pbit (
      .pclk(rosc_clks[CK]), .rst_n(rst_n), .en(run_s[CK]),
      .beta(beta), .i_field(fld), .m(m[i])
    );
  end

  initial begin
    assert (N_ROSC % 2 == 0) else $error("chimera_array: N_ROSC must be even");
    assert (N == ROWS * COLS * TILE) else $error("chimera_array: N must be ROWS*COLS*8");
  end
endmodule
