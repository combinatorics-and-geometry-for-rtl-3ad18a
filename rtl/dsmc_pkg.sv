// dsmc_pkg: shared sizes, address map and transaction types of the
// distributed shared memory controller (DSMC).
//
// The configuration is DSMC-32M32S: 32 master ports and 32 memory banks in
// two building blocks of 16 masters and 16 banks each, 4 Mbytes in all, with
// one speed-up network (r = 2). Those numbers follow the paper's prototype.
// The data width (64 bits), the burst length limit (16 beats, the longest
// burst the evaluation uses) and the per-master reorder depth are this
// design's own choices.
//
// Address map (word addresses, one word = DATA_W bits):
//   bit  0                    building block   (alternating beats go to the
//                                              two building blocks)
//   bits BANK_W:1             bank in the block (consecutive beats that land
//                                              in one block hit different banks)
//   bits ADDR_W-1:BANK_W+1    row inside the bank
package dsmc_pkg;

  // ---- configuration ------------------------------------------------------
  localparam int unsigned N_BB        = 2;          // building blocks
  localparam int unsigned BB_MASTERS  = 16;         // master ports per block
  localparam int unsigned BB_BANKS    = 16;         // banks per block
  localparam int unsigned N_MASTERS   = N_BB * BB_MASTERS;    // 32
  localparam int unsigned N_SW        = BB_MASTERS / 2;        // switches per level (8)
  localparam int unsigned DATA_W      = 64;
  localparam int unsigned MEM_BYTES   = 4 * 1024 * 1024;
  localparam int unsigned TOTAL_WORDS = MEM_BYTES / (DATA_W / 8);    // 512K
  localparam int unsigned ADDR_W      = $clog2(TOTAL_WORDS);         // 19
  localparam int unsigned BANK_W      = $clog2(BB_BANKS);            // 4
  localparam int unsigned ROW_W       = ADDR_W - 1 - BANK_W;         // 14
  localparam int unsigned BANK_ROWS   = 1 << ROW_W;                  // 16384
  localparam int unsigned LEN_W       = 4;          // burst length - 1, up to 16 beats
  localparam int unsigned TAG_W       = 6;          // reorder buffer tag
  localparam int unsigned ROB_DEPTH   = 1 << TAG_W;  // 64 beats in flight per master
  localparam int unsigned MID_W       = $clog2(N_MASTERS);   // global master id

  // ---- transaction types -------------------------------------------------
  // Command at a master port: one burst.
  typedef struct packed {
    logic              wr;     // 1 = write, 0 = read
    logic [ADDR_W-1:0] addr;   // word address of the first beat
    logic [LEN_W-1:0]  len;    // number of beats - 1
  } cmd_t;

  // One beat as the master port hands it to the first-level switch, before
  // address decoding.
  typedef struct packed {
    logic [MID_W-1:0]  mid;
    logic [TAG_W-1:0]  tag;
    logic              wr;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
  } beat_t;

  // One beat travelling from the first-level switch towards a bank.
  typedef struct packed {
    logic [MID_W-1:0]  mid;    // {source block, master index in block}
    logic [TAG_W-1:0]  tag;    // reorder buffer slot at the master
    logic              wr;
    logic              bb;     // destination building block
    logic [BANK_W-1:0] bank;   // destination bank in that block
    logic [ROW_W-1:0]  row;
    logic [DATA_W-1:0] wdata;
  } req_t;

  // One response beat travelling from a bank back to a master.
  typedef struct packed {
    logic [MID_W-1:0]  mid;
    logic [TAG_W-1:0]  tag;
    logic              wr;     // 1 = write acknowledge, 0 = read data
    logic [DATA_W-1:0] rdata;
  } rsp_t;

  // Response beat as a master sees it, in issue order.
  typedef struct packed {
    logic              wr;
    logic [DATA_W-1:0] rdata;
  } mrsp_t;

  localparam int unsigned REQ_W = $bits(req_t);
  localparam int unsigned RSP_W = $bits(rsp_t);

  // ---- address decoding ---------------------------------------------------
  function automatic logic addr_bb(logic [ADDR_W-1:0] a);
    return a[0];
  endfunction

  function automatic logic [BANK_W-1:0] addr_bank(logic [ADDR_W-1:0] a);
    return a[BANK_W:1];
  endfunction

  function automatic logic [ROW_W-1:0] addr_row(logic [ADDR_W-1:0] a);
    return a[ADDR_W-1:BANK_W+1];
  endfunction

endpackage
