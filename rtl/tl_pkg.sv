// tl_pkg: shared widths, timing constants and bus types of the twin-load
// memory-extension system.
//
// Address map. The memory controller sees one logical rank per top-level MEC
// (MEC1). A logical row is {shadow, rank_id, physical_row}: the most
// significant row bit selects the shadow copy of the extended memory (the MEC
// ignores it when it locates data), the next RID_W bits name one physical rank
// of the MEC tree below that MEC1 (the paper's "physical DIMM ID" in the high
// row bits), and the low PROW_W bits are the row inside that rank. The line
// address used as the Load Value Cache tag is {rank_id, physical_row, column,
// bank}, i.e. <row, column, bank> with the shadow bit dropped.
//
// Data moves in beats of BEAT_W bits, one per clock (two 64-bit DDR transfers);
// a burst of BURST beats is one 64-byte cache line.
//
// Timing constants are clock cycles at DDR3-1600 (tCK = 1.25 ns), converted
// from the typical values of the paper's DDRx timing table (tRL 13.75 ns,
// tBURST 4 cycles, tCCD 4 cycles, tRTP 7.5 ns, tRP 13.75 ns, tRCD 13.75 ns).
// T_WL (8) and the per-hop propagation delay T_PD (3.4 ns rounded up to 3
// cycles) are this design's choices.
package tl_pkg;

  // ---------------- geometry ----------------
  localparam int unsigned BANK_W  = 3;                    // 8 banks per rank
  localparam int unsigned COL_W   = 10;                   // DDR3 column address
  localparam int unsigned PROW_W  = 16;                   // physical row address
  localparam int unsigned RID_W   = 4;                    // physical rank ID below one MEC1
  localparam int unsigned LROW_W  = 1 + RID_W + PROW_W;   // logical row seen by the controller
  localparam int unsigned ADDR_W  = LROW_W;               // controller address bus (row or column)
  localparam int unsigned LADDR_W = RID_W + PROW_W + COL_W + BANK_W;  // line address / LVC tag
  localparam int unsigned BEAT_W  = 128;
  localparam int unsigned BURST   = 4;
  localparam int unsigned BEAT_IW = 2;                    // beat index width
  localparam int unsigned LINE_W  = BEAT_W * BURST;
  localparam int unsigned TAG_ID_W = 8;                   // {generation, LVC index} carried with a prefetch

  // ---------------- timing (cycles) ----------------
  localparam int unsigned T_RL  = 11;
  localparam int unsigned T_WL  = 8;
  localparam int unsigned T_CCD = 4;
  localparam int unsigned T_RTP = 6;
  localparam int unsigned T_RP  = 11;
  localparam int unsigned T_RCD = 11;
  localparam int unsigned T_PD  = 3;

  // Placeholder returned for a prefetching load: repeated 0x5a.
  localparam logic [BEAT_W-1:0] FAKE_BEAT = {(BEAT_W/8){8'h5a}};

  // ---------------- bus types ----------------
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_RD  = 3'd2,
    CMD_WR  = 3'd3,
    CMD_PRE = 3'd4,   // addr[10] = 1 : precharge all banks
    CMD_REF = 3'd5
  } ddr_cmd_e;

  localparam int unsigned A10 = 10;  // auto/all bit of PRE

  // Command from the memory controller (DDRx slave side of MEC1).
  typedef struct packed {
    ddr_cmd_e            cmd;
    logic                cs;      // logical rank (selects one MEC1)
    logic [BANK_W-1:0]   bank;
    logic [ADDR_W-1:0]   addr;    // row for ACT, column for RD/WR
  } mc_cmd_t;

  // One data beat on any data bus.
  typedef struct packed {
    logic                valid;
    logic [BEAT_W-1:0]   data;
  } beat_t;

  // Command on the link between MECs (MEC1 master side and below).
  typedef struct packed {
    ddr_cmd_e              cmd;
    logic                  bcast;   // PRE-all or REF: goes to every rank
    logic [RID_W-1:0]      rid;     // target physical rank
    logic [BANK_W-1:0]     bank;
    logic [PROW_W-1:0]     addr;    // physical row or column
    logic                  safe;    // read issued by the safe path
    logic [TAG_ID_W-1:0]   tag_id;  // LVC entry ID + generation of a prefetch
  } link_cmd_t;

  // Read data returned up the tree, tagged with the prefetch's entry ID.
  typedef struct packed {
    logic                  valid;
    logic                  safe;
    logic [TAG_ID_W-1:0]   tag_id;
    logic [BEAT_IW-1:0]    beat;
    logic [BEAT_W-1:0]     data;
  } link_ret_t;

  // Command from a leaf MEC to its dual-rank DIMM.
  typedef struct packed {
    ddr_cmd_e            cmd;
    logic [1:0]          cs;      // one-hot rank select, both for PRE-all / REF
    logic [BANK_W-1:0]   bank;
    logic [PROW_W-1:0]   addr;
  } dram_cmd_t;

  // One-cycle event pulses of a MEC1, for statistics and tests.
  typedef struct packed {
    logic first_load;     // RD identified as first twin-load: prefetch + fake data
    logic second_load;    // RD hit the LVC: buffered line returned
    logic late_data;      // second load hit, but the line had not arrived: fake data
    logic evict;          // a valid LVC entry replaced (LRU)
    logic lf_demand_miss; // TL-LF: shadow load found no entry: fake data
    logic lf_reuse;       // TL-LF: prefetch load found its line already buffered
    logic no_alloc;       // no LVC entry could be allocated: fake data, no prefetch
    logic wr_inval;       // a write invalidated a buffered line
    logic mmio_access;    // RD/WR to the safe-path registers
    logic safe_done;      // safe-path read completed
  } mec1_ev_t;

  function automatic int unsigned ipow(int unsigned b, int unsigned e);
    int unsigned r = 1;
    for (int unsigned i = 0; i < e; i++) r = r * b;
    return r;
  endfunction

endpackage
