// earth_pkg: configuration constants and shared types of the strided/segment
// vector memory-access unit.
//
// The defaults are the "performance" configuration of the design: VLEN = DLEN
// = MLEN = 512 bits, ELEN = 64 bits, eight register banks, 32 vector
// registers. The load/store path assumes MLEN == VLEN (one memory line fills at
// most one register). Queue depths and the 32-bit address width are this
// implementation's own choices.
package earth_pkg;

  localparam int unsigned VLEN   = 512;            // bits per vector register
  localparam int unsigned ELEN   = 64;             // bits per bank word (ELEN block)
  localparam int unsigned MLEN   = 512;            // bits per memory line / request
  localparam int unsigned NBANKS = 8;              // register-file banks
  localparam int unsigned NVREG  = 32;             // architectural vector registers
  localparam int unsigned AW     = 32;             // address width
  localparam int unsigned MLENB  = MLEN / 8;       // bytes per memory line
  localparam int unsigned VLENB  = VLEN / 8;       // bytes per register
  localparam int unsigned CW     = $clog2(MLENB);  // byte index / shift count width
  localparam int unsigned QDEPTH = 8;              // in-flight queue entries
  localparam int unsigned TAGW   = $clog2(QDEPTH); // memory request tag width
  localparam int unsigned VLW    = 11;             // vl field width (vl <= 512)

  // Instruction access kinds handled by the sequencers.
  typedef enum logic [1:0] {
    K_UNIT        = 2'd0,   // unit-stride
    K_STRIDED     = 2'd1,   // constant stride
    K_SEG_UNIT    = 2'd2,   // segment, unit-stride (segment stride = NF*EEWB)
    K_SEG_STRIDED = 2'd3    // segment, constant stride between segments
  } acc_kind_e;

  // A vector memory instruction as it leaves the frontend.
  typedef struct packed {
    logic                  store;
    acc_kind_e             kind;
    logic [1:0]            eew_log;   // log2 of element bytes (EEWB)
    logic [2:0]            nf_m1;     // fields - 1 (segment only)
    logic [1:0]            emul_log;  // log2 EMUL (registers per field group)
    logic [4:0]            vd;        // first register (vd or vs3)
    logic [AW-1:0]         base;
    logic signed [AW-1:0]  stride;    // byte stride (strided kinds)
    logic [VLW-1:0]        vl;
  } vinstr_t;

  typedef enum logic [1:0] {
    M_UNIT    = 2'd0,   // contiguous bytes of one line, row access
    M_STRIDED = 2'd1,   // coalesced strided elements of one line, row access
    M_SEG     = 2'd2    // fields of one segment, column access
  } mop_kind_e;

  // One memory operation: a single line request plus how its bytes map to
  // the register file.
  typedef struct packed {
    logic            store;
    mop_kind_e       kind;
    logic            neg;       // negative stride (goes through the Reverser)
    logic [1:0]      eew_log;
    logic [1:0]      emul_log;
    logic [2:0]      f0;        // first field (segment)
    logic [AW-1:0]   addr;      // line-aligned address
    logic [CW-1:0]   offset;    // byte offset of first element (in the reversed line if neg)
    logic [CW:0]     stride;    // |stride| in bytes, clipped to MLENB (strided)
    logic [CW:0]     nelem;     // elements (unit/strided) or fields (segment)
    logic [4:0]      vreg;      // register (row) or first register of the column
    logic [CW-1:0]   vbyte;     // byte offset of the first element inside the register
  } mop_t;

  // Register-file write request (row or column).
  typedef struct packed {
    logic              col;
    logic [4:0]        vreg;
    logic [CW-1:0]     vbyte;     // column: byte offset of the element in each register
    logic [1:0]        eew_log;
    logic [1:0]        emul_log;
    logic [2:0]        f0;
    logic [CW:0]       nfld;
    logic [VLEN-1:0]   data;      // row: register image; column: fields packed from byte 0
    logic [VLENB-1:0]  mask;      // row: byte enables; column: unused
  } vrf_wr_t;

  // Register-file read request (row or column).
  typedef struct packed {
    logic              col;
    logic [4:0]        vreg;
    logic [CW-1:0]     vbyte;
    logic [1:0]        eew_log;
    logic [1:0]        emul_log;
    logic [2:0]        f0;
    logic [CW:0]       nfld;
  } vrf_rd_t;

  // Row of the shifted register file that holds register i (all of its blocks).
  function automatic int unsigned vrf_row(input int unsigned i, input int unsigned nrows);
    return ((i / NBANKS) * (VLEN / ELEN) + (i % NBANKS)) % nrows;
  endfunction

endpackage
