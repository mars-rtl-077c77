// mars_pkg: types and sizes shared by the MARS in-storage raw-signal
// genome-analysis datapath.
//
// The sizes follow the evaluated configuration: a 4 GB LPDDR4 SSD-internal
// DRAM with 512 subarrays of 256 rows of 2048 bytes, one Arithmetic Unit per
// pair of subarrays (256), one Querying Unit per subarray (512), one
// Sorter/Merger pair per flash controller (8 channels), sorter subsequences
// of at most 128 elements and 16-bit fixed-point words. The instruction
// encoding of the Arithmetic Unit, the 32-bit anchor word and the command
// codes are this design's own choices.
package mars_pkg;

  // ---------------- SSD-internal DRAM geometry ----------------
  localparam int unsigned DRAM_ROWS      = 256;              // rows per subarray
  localparam int unsigned ROW_BYTES      = 2048;             // bytes per row
  localparam int unsigned ROW_BITS       = ROW_BYTES * 8;    // 16384
  localparam int unsigned N_SUBARRAYS    = 512;
  localparam int unsigned N_PAIRS        = N_SUBARRAYS / 2;  // Arithmetic Units

  // ---------------- data words ----------------
  localparam int unsigned WORD_W         = 16;               // fixed-point word
  localparam int unsigned ELEM_W         = 32;               // anchor: {ref_pos, qry_pos}

  // ---------------- SSD controller side ----------------
  localparam int unsigned N_CHANNELS     = 8;                // flash channels = sort lanes
  localparam int unsigned SORT_N         = 128;              // sorter subsequence length

  // ---------------- Arithmetic Unit instruction ----------------
  typedef enum logic [4:0] {
    AU_NOP    = 5'd0,
    AU_ADD    = 5'd1,
    AU_SUB    = 5'd2,
    AU_MUL    = 5'd3,   // signed (a*b) >>> imm[3:0]  (fixed-point multiply)
    AU_AND    = 5'd4,
    AU_OR     = 5'd5,
    AU_XOR    = 5'd6,
    AU_SHL    = 5'd7,
    AU_SHRA   = 5'd8,
    AU_MIN    = 5'd9,   // signed
    AU_MAX    = 5'd10,  // signed
    AU_CMPLT  = 5'd11,  // signed a < b  -> 1 / 0
    AU_CMPEQ  = 5'd12,
    AU_RDCOL  = 5'd13,  // rd = latch[w][col[w]]
    AU_WRCOL  = 5'd14,  // latch[w][col[w]] = ra
    AU_SETCOL = 5'd15,  // col[w] = a + b
    AU_ACT    = 5'd16,  // latch[w] = subarray[sub].row[a + b]
    AU_WB     = 5'd17,  // subarray[sub].row[a + b] = latch[w]
    AU_HALT   = 5'd31
  } au_op_e;

  localparam int unsigned AU_NREGS  = 8;
  localparam int unsigned AU_NLATCH = 3;    // rows of column-selection latches
  localparam int unsigned AU_IB_DEPTH = 64; // instruction buffer entries
  localparam int unsigned AU_PC_W   = $clog2(AU_IB_DEPTH);

  // One pre-decoded instruction: operands, destination and both successors.
  typedef struct packed {
    au_op_e                   op;
    logic [2:0]               rd;
    logic [2:0]               ra;
    logic [2:0]               rb;
    logic                     use_imm;  // operand b = imm instead of reg[rb]
    logic [WORD_W-1:0]        imm;
    logic [1:0]               w;        // column-selection latch row
    logic                     sub;      // which of the two subarrays
    logic                     col_inc;  // advance col[w] after RDCOL/WRCOL
    logic [AU_PC_W-1:0]       next_t;   // successor when flag = 1
    logic [AU_PC_W-1:0]       next_f;   // successor when flag = 0
  } au_instr_t;

  // ---------------- host commands (NVMe) ----------------
  typedef enum logic [1:0] {
    CMD_NONE      = 2'd0,
    CMD_MARS_INIT = 2'd1,
    CMD_MARS_WRITE= 2'd2
  } mars_cmd_e;

  // ---------------- control unit steps ----------------
  typedef enum logic [3:0] {
    ST_CONV      = 4'd0,   // conventional mode
    ST_FLUSH     = 4'd1,   // flush conventional-mode metadata
    ST_LOAD      = 4'd2,   // flash -> DRAM
    ST_EVENT     = 4'd3,   // 1a,1b  signal-to-event, quantization (AU)
    ST_HASH      = 4'd4,   // 2c,2d  hash values, frequency filter (AU)
    ST_QUERY     = 4'd5,   // 2e     hash-table query (QU)
    ST_VOTE      = 4'd6,   // 2f     seed-and-vote filter (AU)
    ST_BUCKET    = 4'd7,   // 3g     bucketize (AU)
    ST_SORT      = 4'd8,   // 3h     sort and merge (Sorter/Merger)
    ST_CHAIN     = 4'd9,   // 3i     dynamic-programming chaining (AU)
    ST_RESULT    = 4'd10,  // results in DRAM, wait for MARS_Write
    ST_WRITE     = 4'd11,  // DRAM -> flash
    ST_DONE      = 4'd12   // update FTL, return to conventional mode
  } mars_state_e;

  localparam int unsigned N_AU_STEPS = 5;  // EVENT, HASH, VOTE, BUCKET, CHAIN
  typedef enum logic [2:0] {
    AUS_EVENT = 3'd0, AUS_HASH = 3'd1, AUS_VOTE = 3'd2, AUS_BUCKET = 3'd3, AUS_CHAIN = 3'd4
  } au_step_e;

  // ---------------- flash addressing (accelerator-mode FTL) ----------------
  localparam int unsigned PAGES_PER_BLOCK = 256;
  localparam int unsigned PBA_W   = 16;
  localparam int unsigned PAGE_W  = $clog2(PAGES_PER_BLOCK);
  localparam int unsigned CH_W    = $clog2(N_CHANNELS);
  localparam int unsigned LPA_W   = 32;
  localparam int unsigned NPG_W   = 16;   // page counts
  localparam int unsigned MAX_PBAS = 64;  // entries of the PBA list
  localparam int unsigned PBAI_W  = $clog2(MAX_PBAS);

  typedef struct packed {
    logic [LPA_W-1:0]  lpa;
    logic [CH_W-1:0]   ch;
    logic [PBA_W-1:0]  pba;
    logic [PAGE_W-1:0] page;
  } flash_addr_t;

  // ---------------- run configuration given with MARS_Init ----------------
  localparam int unsigned RA_W = $clog2(DRAM_ROWS);
  typedef struct packed {
    // input database in flash (index and raw signals)
    logic [LPA_W-1:0]  db_start_lpa;
    logic [PAGE_W-1:0] db_start_page;   // page offset of the starting PPA
    logic [PBAI_W-1:0] db_list_base;    // first PBA-list entry of the database
    logic [NPG_W-1:0]  db_pages;
    logic [RA_W-1:0]   load_row;        // first DRAM row receiving pages
    // Arithmetic Unit program entry points, one per step
    logic [N_AU_STEPS-1:0][AU_PC_W-1:0] au_pc;
    // Querying Unit
    logic [RA_W-1:0]   qu_key_row;
    logic [RA_W-1:0]   qu_dst_row;
    logic [RA_W-1:0]   qu_first_row;
    logic [RA_W:0]     qu_n_rows;
    logic [WORD_W-1:0] qu_key_base;
    // chaining buckets (one per sort lane)
    logic [RA_W-1:0]   bkt_src_row;
    logic [RA_W-1:0]   bkt_dst_row;
    logic [N_CHANNELS-1:0][15:0] bkt_len;
    // results written to flash on MARS_Write
    logic [LPA_W-1:0]  res_start_lpa;
    logic [PBAI_W-1:0] res_list_base;
    logic [NPG_W-1:0]  res_pages;
    logic [RA_W-1:0]   res_row;
  } mars_cfg_t;

endpackage
