// topsort_pkg -- types, sizes and address maps shared by the two-phase sorter.
//
// Elements are 64-bit key/value records (32-bit key, 32-bit value) sorted in
// ascending key order. Inside the streaming merge units every element carries
// a 2-bit class so that the unit can use -inf / +inf fill values without
// reserving key codes (mrec_t). Runs travel between merge units as streams of
// E-wide batches framed by a 'last' flag; a zero-length run is a single token
// with 'empty' set.
//
// The sizes (16 trees, 16 leaves, 8 elements per cycle per tree, 32 elements
// per cycle in the second phase, 512-bit AXI, 32 HBM channels, 4 KB output
// batches, 1 KB / 4 KB bursts) follow the published design. The AXI address
// format {channel, 28-bit offset} (256 MB per pseudo channel) and the rotation
// of phase-2 batches over an AXI port's four channels are this design's choice.
package topsort_pkg;

  localparam int KEY_W        = 32;
  localparam int VAL_W        = 32;
  localparam int ELEM_W       = KEY_W + VAL_W;     // 64-bit record
  localparam int MREC_W       = ELEM_W + 2;        // record plus class bits
  localparam int CMP_W        = KEY_W + 2;         // compared field {class,key}

  localparam int NUM_TREES    = 16;                // phase-1 merge trees
  localparam int NUM_LEAVES   = 16;                // leaves per tree
  localparam int P1_RATE      = 8;                 // elements/cycle at a tree root
  localparam int P2_RATE      = 32;                // elements/cycle of the phase-2 tree
  localparam int NUM_REUSED   = 4;                 // trees 0,4,8,12 are reused

  localparam int NUM_CHANNELS = 32;
  localparam int CH_W         = 5;
  localparam int CH_OFF_W     = 28;                // 256 MB per pseudo channel
  localparam int AXI_ADDR_W   = CH_W + CH_OFF_W;
  localparam int AXI_DATA_W   = 512;
  localparam int AXI_ID_W     = 4;                 // leaf index of a read burst
  localparam int BEAT_BYTES   = AXI_DATA_W / 8;
  localparam int ELEMS_PER_BEAT = AXI_DATA_W / ELEM_W;   // 8

  localparam int BURST_BEATS_P1    = 16;           // 1 KB bursts, trees not reused
  localparam int BURST_BEATS_REUSE = 64;           // 4 KB bursts, reused trees
  localparam int BATCH_BYTES       = 4096;         // phase-2 output batch
  localparam int BATCH_BEATS       = BATCH_BYTES / BEAT_BYTES;

  localparam logic [1:0] CLS_NEG  = 2'd0;
  localparam logic [1:0] CLS_REAL = 2'd1;
  localparam logic [1:0] CLS_POS  = 2'd2;

  typedef struct packed {
    logic [KEY_W-1:0] key;
    logic [VAL_W-1:0] value;
  } elem_t;

  typedef struct packed {
    logic [1:0] cls;
    elem_t      e;
  } mrec_t;

  // AXI4 channel payloads (valid/ready travel as separate signals)
  typedef struct packed {
    logic [AXI_ADDR_W-1:0] addr;
    logic [7:0]            len;   // beats - 1
    logic [AXI_ID_W-1:0]   id;
  } axi_ar_t;

  typedef struct packed {
    logic [AXI_DATA_W-1:0] data;
    logic [AXI_ID_W-1:0]   id;
    logic                  last;
  } axi_r_t;

  typedef struct packed {
    logic [AXI_ADDR_W-1:0] addr;
    logic [7:0]            len;
  } axi_aw_t;

  typedef struct packed {
    logic [AXI_DATA_W-1:0] data;
    logic                  last;
  } axi_w_t;

  typedef struct packed {
    logic [1:0] resp;
  } axi_b_t;

  // Configuration of one pass, broadcast to all trees.
  typedef struct packed {
    logic       phase2;     // 0: phase-1 pass, 1: the phase-2 pass
    logic       par;        // tree t reads channel 2t+par, writes 2t+1-par
    logic [4:0] run_log2;   // log2 of the input run length R (elements)
    logic [4:0] runs_log2;  // log2 of the runs per leaf G (= rounds)
    logic [4:0] m;          // active leaves (1..16)
    logic [4:0] log2_nt;    // log2 of elements per tree (N/16)
  } tree_cfg_t;

  function automatic logic [AXI_ADDR_W-1:0] mkaddr(input int unsigned ch,
                                                   input longint unsigned off);
    logic [CH_W-1:0]     c;
    logic [CH_OFF_W-1:0] o;
    c = CH_W'(ch);
    o = CH_OFF_W'(off);
    return {c, o};
  endfunction

  // Address of burst k written by reused tree 4i during phase 2: batch
  // b = 4k+i of the sorted output, channel 8i + 2(k mod 4) + (1-par),
  // offset (k/4) * 4 KB.
  function automatic logic [AXI_ADDR_W-1:0] p2_out_addr(input int unsigned i,
                                                        input longint unsigned k,
                                                        input logic par);
    int unsigned ch;
    ch = 8 * i + 2 * int'(k % 4) + (par ? 0 : 1);
    return mkaddr(ch, (k / 4) * BATCH_BYTES);
  endfunction

  function automatic logic [CMP_W-1:0] cmp_field(input mrec_t r);
    return {r.cls, r.e.key};
  endfunction

endpackage
