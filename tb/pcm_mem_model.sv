// pcm_mem_model -- behavioural model of the off-chip MLC PCM main memory,
// for simulation only (not synthesizable intent; the real part is an analog
// array). It holds NLINES lines of 257 two-bit cells (256 data cells plus the
// flag cell), all starting at 00 (state S1). A write programs only the cells
// whose enable bit is set, which is how differential write reaches the array,
// and adds the energy of those cells (36 pJ RESET plus the SET energy of the
// target state, S3/S4 SET energies set by E_S3/E_S4) to a running total. Reads are combinational.
module pcm_mem_model
  import wlcrc_pkg::*;
#(
  parameter int          NLINES = 16,
  parameter int unsigned E_S3   = E_SET_S3,
  parameter int unsigned E_S4   = E_SET_S4
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(NLINES)-1:0] waddr,
  input  logic [STORED_BITS-1:0]    wimage,
  input  logic [STORED_CELLS-1:0]   wcell_en,
  input  logic [$clog2(NLINES)-1:0] raddr,
  output logic [STORED_BITS-1:0]    rimage,
  output longint                    energy_total,
  output longint                    cells_total
);

  logic [STORED_BITS-1:0] mem [NLINES];

  initial begin
    for (int i = 0; i < NLINES; i++) mem[i] = '0;
    energy_total = 0;
    cells_total  = 0;
  end

  assign rimage = mem[raddr];

  always @(posedge clk) begin
    if (we) begin
      for (int j = 0; j < STORED_CELLS; j++) begin
        if (wcell_en[j]) begin
          energy_total += longint'(cell_cost(wimage[2*j +: 2], mem[waddr][2*j +: 2], E_S3, E_S4));
          cells_total  += 1;
          mem[waddr][2*j +: 2] <= wimage[2*j +: 2];
        end
      end
    end
  end

endmodule
