// dc_buffer: the Duplication Check (DC) buffer scratchpad.
//
// 16 banks of BANK_DEPTH x 128-bit words (4 MB at the defaults): banks 0-9
// hold RGB patches, banks 10-14 depth maps and bank 15 metadata, the split the
// paper gives. Entry placement inside the banks is defined by the functions
// rgb_bank/rgb_row, dep_bank/dep_row and meta_row of epic_pkg.
//
// Port A reads and writes (buffer controller, insertion of new entries);
// port B only reads (reprojection engine). Each bank is modelled as a memory
// array with one write and two read ports; the port structure is this
// design's choice. Reads have one cycle of latency; a read and a write of the
// same word in one cycle return the old data.
module dc_buffer #(
  parameter int unsigned BANKS      = 16,
  parameter int unsigned BANK_DEPTH = 16384,
  parameter int unsigned WORD_W     = 128
) (
  input  logic                          clk,
  // port A
  input  logic                          a_en,
  input  logic                          a_we,
  input  logic [$clog2(BANKS)-1:0]      a_bank,
  input  logic [$clog2(BANK_DEPTH)-1:0] a_row,
  input  logic [WORD_W-1:0]             a_wdata,
  output logic [WORD_W-1:0]             a_rdata,
  // port B
  input  logic                          b_en,
  input  logic [$clog2(BANKS)-1:0]      b_bank,
  input  logic [$clog2(BANK_DEPTH)-1:0] b_row,
  output logic [WORD_W-1:0]             b_rdata
);
  logic [WORD_W-1:0] mem [BANKS][BANK_DEPTH];

  always_ff @(posedge clk) begin
    if (a_en && a_we) mem[a_bank][a_row] <= a_wdata;
    if (a_en && !a_we) a_rdata <= mem[a_bank][a_row];
    if (b_en) b_rdata <= mem[b_bank][b_row];
  end
endmodule
