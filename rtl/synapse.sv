// synapse -- local field of one p-bit, I_i = sum_j J_ij*m_j + h_i.
//
// Combinational, as in the paper: the field follows the neighbour states as
// soon as they change, with no clock. A neighbour state bit m=1 means +1 and
// m=0 means -1, so each term adds +J or -J. Slots whose nbr_valid bit is 0
// (no neighbour at the lattice edge) add nothing. Weights and bias are
// signed with 8 fraction bits (pbit_pkg::weight_t); the 13-bit result cannot
// overflow for DEG <= 6.
module synapse
  import pbit_pkg::*;
#(
  parameter int NDEG = DEG
) (
  input  logic    [NDEG-1:0] m_nbr,
  input  weight_t            j_w [NDEG],
  input  weight_t            h,
  input  logic    [NDEG-1:0] nbr_valid,
  output field_t             i_field
);
  always_comb begin
    i_field = field_t'(h);
    for (int s = 0; s < NDEG; s++) begin
      if (nbr_valid[s]) begin
        if (m_nbr[s]) i_field = i_field + field_t'(j_w[s]);
        else          i_field = i_field - field_t'(j_w[s]);
      end
    end
  end
endmodule
