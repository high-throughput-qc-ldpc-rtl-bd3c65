// ldpc_pkg -- constants and types shared by the pipelined layered QC-LDPC decoder.
//
// The default sizes describe the largest code the decoder is built for: a 5G NR base
// graph 1 code (46 layers, 68 block columns, 316 non-zero circulants, largest layer
// degree 19) at lifting size Z = 384, i.e. K = 8448 information bits. The lifting size
// and the SO data path latency t are set per decode; t is 4 after reset, one of the two
// values the schedule study evaluates (4 and 9). Message widths and the fixed-point format are this design's own choice:
// LLRs carry 2 fractional bits, SO values are 8-bit signed, C2V messages 6-bit signed.
//
// Field widths of the packed structs are fixed here and cover the defaults; modules
// check with assertions that their parameters fit them.
package ldpc_pkg;

  // ---- default sizes -------------------------------------------------------------
  localparam int unsigned Z_DEF      = 384;  // lifting size (lanes)
  localparam int unsigned NCOL_DEF   = 68;   // block columns of BG1
  localparam int unsigned NLAYER_DEF = 46;   // layers (rows of BG1)
  localparam int unsigned EMAX_DEF   = 316;  // non-zero circulants of BG1
  localparam int unsigned DMAX_DEF   = 19;   // largest layer degree of BG1
  localparam int unsigned T_DEF      = 4;    // SO data path latency t after reset (cycles)
  localparam int unsigned NBANK_DEF  = 4;    // layers the check node unit holds at once

  // ---- fixed-point formats -----------------------------------------------------------
  localparam int unsigned QSO   = 8;   // SO / V2C width, signed, 2 fractional bits
  localparam int unsigned QC2V  = 6;   // C2V width, signed, 2 fractional bits
  localparam int unsigned QMAG  = 5;   // phi-domain magnitude width (0 .. 7.75)
  localparam int unsigned QSUM  = 10;  // sum of up to 32 phi values

  // ---- field widths -------------------------------------------------------------------
  localparam int unsigned COL_W   = 7;   // block column index   (up to 128)
  localparam int unsigned SHIFT_W = 9;   // circulant shift      (Z up to 512)
  localparam int unsigned E_W     = 9;   // edge / entry address (up to 512)
  localparam int unsigned K_W     = 5;   // slot within a layer  (degree up to 31)
  localparam int unsigned L_W     = 6;   // schedule position    (up to 64)
  localparam int unsigned BANK_W  = 2;   // check node unit bank (up to 4)

  typedef logic signed [QSO-1:0]  so_t;
  typedef logic signed [QC2V-1:0] c2v_t;

  // One entry of a scheduled layer, stored in read order. wr_k is not about this
  // entry: it names the read slot whose result is written back in write slot k
  // (the entry's own position), so the table holds both orders.
  typedef struct packed {
    logic [COL_W-1:0]   col;
    logic [SHIFT_W-1:0] shift;
    logic [K_W-1:0]     wr_k;
  } entry_t;

  // Header of one position of the scheduling sequence.
  typedef struct packed {
    logic [E_W-1:0] start;  // first entry (also the first C2V edge address)
    logic [K_W-1:0] deg;    // layer degree, 1 .. 31
  } layer_t;

  // Side information of one block-column read, carried alongside the data.
  typedef struct packed {
    logic [BANK_W-1:0]  bank;
    logic [K_W-1:0]     k;      // read slot within the layer
    logic [COL_W-1:0]   col;
    logic [SHIFT_W-1:0] shift;
    logic [E_W-1:0]     eaddr;  // C2V edge address
    logic [K_W-1:0]     wr_k;   // write-order entry for slot k
    logic               last;   // last read of the layer
  } rd_tag_t;

  // Configuration bus word: entries and headers are written through one port.
  localparam int unsigned CFG_W = (($bits(entry_t) > $bits(layer_t)) ? $bits(entry_t)
                                                                      : $bits(layer_t));

endpackage
