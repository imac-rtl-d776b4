// imac_sram_array: 256x256 array of standard 6T cells with its column circuitry.
//
// Each wordline (one-hot `wl`) selects one row. In a normal write the
// column circuitry drives the bitlines of the columns enabled in `wmask`
// and the selected cells take `wdata`. In a normal read `rdata` returns the
// selected row. In compute mode the same cells drive the bitlines through
// their access transistors; `row_q` gives the stored value Q of the row that
// is on, which the bitline models turn into a discharge. Only one wordline
// is on at a time (an assertion checks it).
//
// Timing: write on the rising clock edge when `we` is high; `rdata` and
// `row_q` are combinational on `wl`. The paper gives the cell and its read
// and write; the bit mask and the synchronous write are this design's
// choice. Column c of row r is bit c of word r.
module imac_sram_array #(
  parameter int unsigned N_ROW = imac_pkg::N_ROW,
  parameter int unsigned N_COL = imac_pkg::N_COL
) (
  input  logic             clk,
  input  logic [N_ROW-1:0] wl,      // one-hot wordline select
  input  logic             we,      // normal write
  input  logic [N_COL-1:0] wdata,
  input  logic [N_COL-1:0] wmask,   // 1 = column driven by the write driver
  output logic [N_COL-1:0] rdata,   // normal read of the selected row
  output logic [N_COL-1:0] row_q    // Q of the selected row, seen by the bitlines
);
  localparam int unsigned AW = $clog2(N_ROW);

  logic [N_COL-1:0] mem [N_ROW];
  logic [AW-1:0]    idx;      // index of the wordline that is on
  logic             any_wl;

  // One-hot to binary: bit b of the index is the OR of the wordlines whose
  // row number has bit b set (exact because at most one line is on).
  always_comb begin
    idx = '0;
    for (int r = 0; r < N_ROW; r++)
      if (wl[r]) idx = idx | AW'(r);
  end
  assign any_wl = |wl;

  always_ff @(posedge clk) begin
    if (we && any_wl)
      for (int c = 0; c < N_COL; c++)
        if (wmask[c]) mem[idx][c] <= wdata[c];
  end

  assign row_q = any_wl ? mem[idx] : '0;
  assign rdata = row_q;

  always_ff @(posedge clk)
    a_one_wl: assert ((wl & (wl - 1'b1)) == '0) else $error("more than one wordline on");
endmodule
