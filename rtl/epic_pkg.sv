// epic_pkg: types and constants shared by the EPIC accelerator and the
// in-sensor frame bypass unit.
//
// The DC (Duplication Check) buffer is 4 MB in 16 banks of 128-bit words:
// banks 0-9 hold RGB patches, banks 10-14 depth maps, bank 15 metadata, as in
// the paper. Patch size (16x16), pixel format (RGB565) and depth width (8 bit)
// are this design's choices; with them one RGB patch is 32 words and one depth
// map 16 words, so the 10:5 bank split is exactly balanced and 5120 entries
// fill every bank. An entry's metadata takes three words of bank 15.
package epic_pkg;

  localparam int unsigned WORD_W      = 128;    // DC buffer word (Fig. 5b)
  localparam int unsigned BANKS       = 16;
  localparam int unsigned RGB_BANKS   = 10;
  localparam int unsigned DEP_BANKS   = 5;
  localparam int unsigned META_BANK   = 15;
  localparam int unsigned BANK_DEPTH  = 16384;  // 4 MB / 16 banks / 16 B
  localparam int unsigned ROW_W       = 14;

  localparam int unsigned PATCH       = 16;     // patch edge in pixels
  localparam int unsigned PATCH_PIX   = PATCH * PATCH;
  localparam int unsigned PIX_W       = 16;     // RGB565
  localparam int unsigned DEP_W       = 8;      // INT8 depth
  localparam int unsigned PIX_PER_W   = WORD_W / PIX_W;   // 8
  localparam int unsigned DEP_PER_W   = WORD_W / DEP_W;   // 16
  localparam int unsigned RGB_WORDS   = PATCH_PIX / PIX_PER_W;  // 32
  localparam int unsigned DEP_WORDS   = PATCH_PIX / DEP_PER_W;  // 16
  localparam int unsigned META_WORDS  = 3;
  localparam int unsigned ENTRY_WORDS = RGB_WORDS + DEP_WORDS + META_WORDS;

  localparam int unsigned N_ENTRIES   = RGB_BANKS * BANK_DEPTH / RGB_WORDS; // 5120
  localparam int unsigned ID_W        = 13;

  localparam int unsigned COORD_W     = 12;     // signed, centred pixel coordinate
  localparam int unsigned CELL_W      = 8;      // patch grid index

  // Camera pose: camera-to-world rotation (Q2.14) and translation (Q8.8, in
  // depth units).
  localparam int unsigned ROT_FRAC    = 14;
  localparam int unsigned TRN_FRAC    = 8;
  typedef struct packed {
    logic signed [8:0][15:0] r;   // r[3*i+j] = R[i][j]
    logic signed [2:0][15:0] t;
  } pose_t;

  // Reprojection matrix, 3x4, m[4*i+j]
  typedef logic signed [11:0][63:0] rmat_t;

  // Metadata of one DC buffer entry (three 128-bit words, bank 15)

  typedef struct packed {
    logic [7:0]   score;
    logic [15:0]  pop;
    logic [7:0]   d_mean;
    logic [CELL_W-1:0] cy;
    logic [CELL_W-1:0] cx;
    logic [31:0]  tc;
    pose_t        pose;
  } meta_t;

  localparam int unsigned META_BITS = $bits(meta_t);

  // Packing into words: pose, t_c, cell and mean depth fill words 0-1;
  // popularity and score sit alone in word 2 so that an increment or an
  // eviction scan touches one word.
  function automatic logic [3*WORD_W-1:0] meta_pack(meta_t m);
    logic [3*WORD_W-1:0] w;
    w = '0;
    w[191:0]   = m.pose;
    w[223:192] = m.tc;
    w[231:224] = m.cx;
    w[239:232] = m.cy;
    w[247:240] = m.d_mean;
    w[271:256] = m.pop;      // word 2
    w[279:272] = m.score;    // word 2
    return w;
  endfunction

  function automatic meta_t meta_unpack(logic [3*WORD_W-1:0] w);
    meta_t m;
    m.pose   = w[191:0];
    m.tc     = w[223:192];
    m.cx     = w[231:224];
    m.cy     = w[239:232];
    m.d_mean = w[247:240];
    m.pop    = w[271:256];
    m.score  = w[279:272];
    return m;
  endfunction

  // Location of entry data in the banks
  function automatic logic [3:0] rgb_bank(logic [ID_W-1:0] id);
    return 4'(int'(id) % RGB_BANKS);
  endfunction
  function automatic logic [ROW_W-1:0] rgb_row(logic [ID_W-1:0] id, int unsigned w);
    return ROW_W'((int'(id) / RGB_BANKS) * RGB_WORDS + w);
  endfunction
  function automatic logic [3:0] dep_bank(logic [ID_W-1:0] id);
    return 4'(RGB_BANKS + int'(id) % DEP_BANKS);
  endfunction
  function automatic logic [ROW_W-1:0] dep_row(logic [ID_W-1:0] id, int unsigned w);
    return ROW_W'((int'(id) / DEP_BANKS) * DEP_WORDS + w);
  endfunction
  function automatic logic [ROW_W-1:0] meta_row(logic [ID_W-1:0] id, int unsigned w);
    return ROW_W'(int'(id) * META_WORDS + w);
  endfunction

  // RGB565 distance: |dR| + |dG| + |dB|
  function automatic logic [7:0] rgb565_dist(logic [15:0] a, logic [15:0] b);
    logic [5:0] dr, dg, db;
    dr = (a[15:11] > b[15:11]) ? 6'(a[15:11] - b[15:11]) : 6'(b[15:11] - a[15:11]);
    dg = (a[10:5]  > b[10:5])  ? 6'(a[10:5]  - b[10:5])  : 6'(b[10:5]  - a[10:5]);
    db = (a[4:0]   > b[4:0])   ? 6'(a[4:0]   - b[4:0])   : 6'(b[4:0]   - a[4:0]);
    return 8'(dr) + 8'(dg) + 8'(db);
  endfunction

  // Computation engine command: one 16x16 output tile
  typedef struct packed {
    logic [14:0] a_addr;   // activation SRAM, word k = column k of A
    logic [14:0] b_addr;   // weight SRAM, word k = row k of B
    logic [14:0] c_addr;   // activation SRAM, word i = row i of C
    logic [14:0] k_len;    // reduction length
    logic [4:0]  shift;    // requantization shift
    logic        relu;
  } gemm_cmd_t;

  // Per-patch outcome of the redundancy check
  typedef enum logic [1:0] {
    RES_DROPPED  = 2'd0,   // S_t = 0 (spatial redundancy)
    RES_MATCHED  = 2'd1,   // temporal match, P_c incremented
    RES_INSERTED = 2'd2    // stored as a new entry
  } res_kind_e;

endpackage
