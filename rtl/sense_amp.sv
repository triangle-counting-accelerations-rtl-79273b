// sense_amp: the row of enhanced sense amplifiers (one per bit line) at the
// bottom of a computational STT-MRAM mat, described at the logic level.
//
// A cell in the low-resistance parallel state (logic 1) conducts the larger
// current I_P, a cell in the anti-parallel state (logic 0) the smaller I_AP.
// With one word line raised the bit line carries one cell current and the
// READ reference, placed between I_AP and I_P, returns the stored bit. With
// two word lines raised the currents add; the AND reference, placed between
// I_AP+I_P and I_P+I_P, returns 1 only when both cells are in the P state.
// Here the summed current is represented by the number of activated cells in
// the P state on each bit line (0, 1 or 2), and each reference by the
// smallest count that lies above it (1 for READ, 2 for AND). The analog
// comparator itself is not modelled.
//
// Ports: mode (MOP_READ or MOP_AND), cell_a / cell_b (state of the cells of
// the first and second activated rows), b_active (second row raised), out.
// Combinational.
module sense_amp #(
  parameter int unsigned W = 64
) (
  input  tc_pkg::mem_op_e mode,
  input  logic [W-1:0]    cell_a,
  input  logic [W-1:0]    cell_b,
  input  logic            b_active,
  output logic [W-1:0]    out
);

  // Number of P-state cells that the reference must reach.
  logic [1:0] ref_level;
  always_comb ref_level = (mode == tc_pkg::MOP_AND) ? 2'd2 : 2'd1;

  always_comb begin
    for (int k = 0; k < W; k++) begin
      logic [1:0] level;
      level  = 2'(cell_a[k]) + 2'(cell_b[k] & b_active);
      out[k] = (level >= ref_level);
    end
  end

endmodule
