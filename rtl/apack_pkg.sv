// apack_pkg: widths, table-entry types and table-write bundles shared by the
// APack encoder and decoder.
//
// APack codes every 8-bit value v as a (symbol, offset) pair. The 16-row
// symbol table splits 0..255 into ascending ranges; row i holds the range's
// lowest value (base, 8b) and the offset length (ob, 3b). The 16-row count
// table holds, per row, the 10-bit cumulative probability count that ends the
// row's count range; the row before supplies the start (0 for row 0). Only the
// symbol row is arithmetically coded, the offset is stored verbatim in a second
// stream. The coder keeps a 16-bit window of the arbitrary-precision HI and LO
// range boundaries and a 5-bit count of pending underflow bits (UBC).
//
// The widths follow the paper: 8b values, 16b HI/LO/CODE, 10b counts, 16 rows,
// 11b symbol-table rows (8b base + 3b offset length), 5b UBC. The write-port
// layouts {enable, row index, data} follow the printed port widths
// 11+4+1 (SYMT_in), 10+4+1 (PCNT_in) and 16+1 (HI_in, LO_in); the order of the
// fields inside each bundle is this design's own choice.
package apack_pkg;

  localparam int unsigned VAL_W  = 8;   // value width
  localparam int unsigned WIN_W  = 16;  // HI / LO / CODE window width
  localparam int unsigned CNT_W  = 10;  // probability count width
  localparam int unsigned NSYM   = 16;  // table rows
  localparam int unsigned IDX_W  = 4;   // row index width
  localparam int unsigned OB_W   = 3;   // offset length field width
  localparam int unsigned UBC_W  = 5;   // underflow bit counter width
  localparam int unsigned RNG_W  = WIN_W + 1; // HI-LO+1 reaches 2^16

  typedef logic [VAL_W-1:0] val_t;
  typedef logic [WIN_W-1:0] win_t;
  typedef logic [CNT_W-1:0] cnt_t;
  typedef logic [NSYM-1:0]  onehot_t;

  // One symbol-table row: 8b range base (v_min) and 3b offset length.
  typedef struct packed {
    val_t             base;
    logic [OB_W-1:0]  ob;
  } symt_entry_t;

  // SYMT_in: 1b enable + 4b row + 11b entry.
  typedef struct packed {
    logic             en;
    logic [IDX_W-1:0] idx;
    symt_entry_t      entry;
  } symt_wr_t;

  // PCNT_in: 1b enable + 4b row + 10b HiCnt.
  typedef struct packed {
    logic             en;
    logic [IDX_W-1:0] idx;
    cnt_t             cnt;
  } pcnt_wr_t;

  // HI_in / LO_in: 1b enable + 16b value.
  typedef struct packed {
    logic en;
    win_t val;
  } range_wr_t;

  // Largest number of code bits one encoder step can emit: up to 15 prefix
  // bits plus, after the first of them, up to 2^UBC_W underflow bits.
  localparam int unsigned CODE_EXP_W = 48;

endpackage
