// pcomputer_top -- asynchronous p-computer: ROWS x COLS Chimera tiles of
// p-bits (800 at the default 10 x 10), each activated by one of N_ROSC free
// running ring oscillators.
//
// Blocks: N_ROSC ring oscillators (ring size RING_BASE + 2k for ROSC k:
// 9, 11, ..., 27, i.e. 16.7 .. 5.6 MHz from the 300 MHz master clock clk),
// a frequency counter that measures any one of them, the coupling memory
// (J and h), the annealing controller (beta schedule) and the Chimera array
// of synapses and p-bits.
//
// Use: write weights through cfg_we/cfg_addr/cfg_wdata (address map in
// coupling_mem), pulse start, wait for done (1.4 ms at the defaults), read
// m. beta shows the current inverse temperature, busy the running trial.
// fc_sel/fc_start start a frequency measurement, fc_count/fc_valid return
// it. The master clock source and the host are outside this module.
module pcomputer_top
  import pbit_pkg::*;
#(
  parameter int          ROWS        = 10,
  parameter int          COLS        = 10,
  parameter int          N_ROSC      = 10,
  parameter int          RING_BASE   = 9,
  parameter int          DELAY_FF    = 1,
  parameter int unsigned N_STEPS     = 14,
  parameter int unsigned HOLD_CYCLES = 29984,
  parameter int unsigned GATE_CYCLES = 30000,
  parameter int          N           = ROWS * COLS * TILE,
  parameter int          ADDR_W      = $clog2(N) + SLOT_W,
  parameter int          SEL_W       = $clog2(N_ROSC)
) (
  input  logic              clk,
  input  logic              rst_n,
  // weight load
  input  logic              cfg_we,
  input  logic [ADDR_W-1:0] cfg_addr,
  input  weight_t           cfg_wdata,
  // annealing
  input  logic              start,
  output logic              busy,
  output logic              done,
  output beta_t             beta,
  output logic [N-1:0]      m,
  // ring oscillator frequency measurement
  input  logic [SEL_W-1:0]  fc_sel,
  input  logic              fc_start,
  output logic [15:0]       fc_count,
  output logic              fc_valid,
  output logic [N_ROSC-1:0] rosc_clks
);
  logic    run;
  weight_t j_all [N][DEG];
  weight_t h_all [N];

  for (genvar k = 0; k < N_ROSC; k++) begin : g_rosc
    rosc #(.RING_SIZE(RING_BASE + 2 * k), .DELAY_FF(DELAY_FF)) u_rosc (
      .clk(clk), .rst_n(rst_n), .rosc_clk(rosc_clks[k])
    );
  end

  freq_counter #(.N_ROSC(N_ROSC), .GATE_CYCLES(GATE_CYCLES), .CNT_W(16)) u_fc (
    .clk(clk), .rst_n(rst_n), .rosc_clks(rosc_clks), .sel(fc_sel),
    .start(fc_start), .count(fc_count), .valid(fc_valid)
  );

  coupling_mem #(.N(N)) u_mem (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr),
    .cfg_wdata(cfg_wdata), .j_all(j_all), .h_all(h_all)
  );

  anneal_ctrl #(.N_STEPS(N_STEPS), .HOLD_CYCLES(HOLD_CYCLES)) u_anneal (
    .clk(clk), .rst_n(rst_n), .start(start), .run(run), .beta(beta),
    .busy(busy), .done(done)
  );

  chimera_array #(.ROWS(ROWS), .COLS(COLS), .N_ROSC(N_ROSC)) u_array (
    .rosc_clks(rosc_clks), .rst_n(rst_n), .run(run), .beta(beta),
    .j_all(j_all), .h_all(h_all), .m(m)
  );
endmodule
