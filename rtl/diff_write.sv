// diff_write -- differential write unit (DIFF in the paper's Fig. 7).
//
// PCM programs only the cells whose content changes. This unit compares the
// line image to be written with the image stored now, one two-bit cell at a
// time, and raises a program-enable bit per changed cell. It also reports how
// many cells change and the programming energy that costs (RESET 36 pJ plus
// the SET energy of the target state, paper Table II), which a memory
// controller can use for accounting (S3/S4 SET energies set by E_S3/E_S4). The paper names DIFF but not its insides;
// the per-cell compare is the plain reading of differential write.
//
// In this design DIFF sits after the raw/encoded multiplexer so it covers both
// paths and the flag cell (the paper's figure draws it on the raw path only;
// the encoded path does the same comparison inside its cost logic).
//
// Interface: new_i, old_i (NCELLS cells, cell j = bits 2j+1..2j) in; cell_en_o,
// ncells_o, energy_o out. Combinational.
module diff_write
  import wlcrc_pkg::*;
#(
  parameter int          NCELLS = STORED_CELLS,
  parameter int unsigned E_S3   = E_SET_S3,
  parameter int unsigned E_S4   = E_SET_S4
) (
  input  logic [2*NCELLS-1:0]      new_i,
  input  logic [2*NCELLS-1:0]      old_i,
  output logic [NCELLS-1:0]        cell_en_o,
  output logic [$clog2(NCELLS+1)-1:0] ncells_o,
  output logic [31:0]              energy_o
);

  always_comb begin
    ncells_o = '0;
    energy_o = '0;
    for (int j = 0; j < NCELLS; j++) begin
      cell_en_o[j] = new_i[2*j +: 2] != old_i[2*j +: 2];
      ncells_o     = ncells_o + ($clog2(NCELLS+1))'(cell_en_o[j]);
      energy_o     = energy_o + 32'(cell_cost(new_i[2*j +: 2], old_i[2*j +: 2], E_S3, E_S4));
    end
  end

endmodule
