// sorter -- pruned (gamma+1 -> gamma) insertion sorter of the MIN unit.
//
// The stored minima m_in[0..GAMMA-1] are already in ascending order, so a
// new magnitude a only has to be compared once with each of them (GAMMA
// comparators, strict less-than). A routing network then builds the new
// list: position i takes m[i] if a is not below it, a if a is below m[i] but
// not below m[i-1], and m[i-1] otherwise. new_min tells that a becomes the
// first minimum, so the caller can record the index of the critical edge.
// Ties keep the earlier entry in front. Purely combinational.
module sorter #(
  parameter int GAMMA = 3,
  parameter int MW    = 4
) (
  input  logic [GAMMA-1:0][MW-1:0] m_in,
  input  logic [MW-1:0]            a,
  output logic [GAMMA-1:0][MW-1:0] m_out,
  output logic                     new_min
);
  logic [GAMMA-1:0] lt;

  always_comb begin
    for (int i = 0; i < GAMMA; i++) lt[i] = (a < m_in[i]);
    m_out[0] = lt[0] ? a : m_in[0];
    for (int i = 1; i < GAMMA; i++) begin
      if (!lt[i])        m_out[i] = m_in[i];
      else if (!lt[i-1]) m_out[i] = a;
      else               m_out[i] = m_in[i-1];
    end
    new_min = lt[0];
  end
endmodule
