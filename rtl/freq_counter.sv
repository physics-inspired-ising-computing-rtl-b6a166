// freq_counter -- measures the frequency of one ring oscillator.
//
// A one-cycle start pulse opens a gate of GATE_CYCLES master cycles during
// which rising edges of rosc_clks[sel] are counted; at the end valid pulses
// for one cycle and count holds the number of edges until the next start.
// f_rosc = count * f_clk / GATE_CYCLES; with the default 30000-cycle gate
// at 300 MHz the count reads directly in units of 10 kHz. The ring
// oscillators are built from master-clock flip-flops, so their outputs are
// sampled without a synchroniser. The paper only says the frequencies were
// measured with dedicated counters; this gated counter is this design's.
module freq_counter #(
  parameter int unsigned N_ROSC      = 10,
  parameter int unsigned GATE_CYCLES = 30000,
  parameter int unsigned CNT_W       = 16,
  parameter int unsigned SEL_W       = $clog2(N_ROSC)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_ROSC-1:0] rosc_clks,
  input  logic [SEL_W-1:0]  sel,
  input  logic              start,
  output logic [CNT_W-1:0]  count,
  output logic              valid
);
  localparam int GW = $clog2(GATE_CYCLES + 1);

  logic          active;
  logic [GW-1:0] gate_cnt;
  logic          cur, prev;
  logic [SEL_W-1:0] sel_q;

  assign cur = rosc_clks[sel_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active   <= 1'b0;
      gate_cnt <= '0;
      count    <= '0;
      valid    <= 1'b0;
      prev     <= 1'b0;
      sel_q    <= '0;
    end else begin
      valid <= 1'b0;
      prev  <= cur;
      if (!active) begin
        if (start) begin
          active   <= 1'b1;
          sel_q    <= sel;
          gate_cnt <= '0;
          count    <= '0;
          prev     <= rosc_clks[sel];
        end
      end else begin
        if (cur && !prev) count <= count + 1'b1;
        if (gate_cnt == GW'(GATE_CYCLES - 1)) begin
          active <= 1'b0;
          valid  <= 1'b1;
        end else begin
          gate_cnt <= gate_cnt + 1'b1;
        end
      end
    end
  end

  // a measurement must select an existing oscillator; valid is a one-cycle pulse
  a_sel_range:   assert property (@(posedge clk) disable iff (!rst_n)
                   (start && !active) |-> (32'(sel) < N_ROSC));
  a_valid_pulse: assert property (@(posedge clk) disable iff (!rst_n) valid |=> !valid);
endmodule
