// mec1: the top-level Memory Extending Chip.
//
// MEC1 sits on the processor's unmodified DDRx channel (slave side) and drives
// a tree of lower MECs (master side). Reads to extended memory take longer
// than the controller's fixed read latency tRL allows, so every access is
// done with two loads (twin-loads) to the same line: one through the extended
// address, one through its shadow address (row MSB set). MEC1 ignores the
// shadow bit, so both loads name the same line, and resolves them with a
// Bank State Table (BST) and a Load Value Cache (LVC):
//
//  * ACT  : the BST records the logical row of the bank; the ACT goes down the
//           tree with the rank ID taken from the row's high bits.
//  * PRE  : closes the bank in the BST; forwarded with the rank ID that the
//           BST row gives (PRE-all and REF go to every rank).
//  * RD   : the line address <row, column, bank> is rebuilt from the BST row
//           and looked up in the LVC.
//      TL-OoO (tl_lf = 0, the main mode): a miss means this is the first of
//           the pair. An entry is allocated (LRU), the RD is forwarded with the
//           entry ID, and tRL later the fake line (0x5a...) goes to the
//           controller. A hit means this is the second load: tRL later the
//           buffered line is returned and the entry freed.
//      TL-LF  (tl_lf = 1): software fences the loads, so the extended-address
//           load is always the prefetch and the shadow-address load the demand.
//           A shadow load that misses returns the fake line. (That MEC1 uses
//           the shadow bit to tell them apart is this design's reading.)
//  * WR   : forwarded with its write data; a buffered copy of the line is
//           invalidated (this design's choice, keeping the LVC coherent).
//
// Data for a prefetch come back up the tree tagged with {generation, entry};
// a line that arrives after its entry was reused is dropped. If the second
// load's burst is due before the line's first beat has arrived, the fake line
// is returned instead and software retries.
//
// The logical row MMIO_ROW (default: the top shadow row) is the window of the
// safe-path registers: WR to column group 0 writes the address register; RD
// of column group 0 returns {busy, flag} in beat 0, RD of column group 1
// returns the data register. Commands to that row are not forwarded.
//
// Timing: commands and write data reach the master link T_PD_C cycles after
// the slave side; read data appear on mc_rdata exactly T_RL_C cycles after the
// RD, for BURST cycles. The controller's own timing (tCCD between RDs, tWL
// for write data) is assumed to be met at the slave side.
module mec1
  import tl_pkg::*;
#(
  parameter int unsigned       M        = 16,
  parameter logic              CS_ID    = 1'b0,
  parameter int unsigned       N_BANKS  = 8,
  parameter int unsigned       T_RL_C   = T_RL,
  parameter int unsigned       T_WL_C   = T_WL,
  parameter int unsigned       T_PD_C   = T_PD,
  parameter int unsigned       T_RCD_C  = T_RCD,
  parameter int unsigned       T_RTP_C  = T_RTP,
  parameter logic [LROW_W-1:0] MMIO_ROW = '1,
  localparam int unsigned      IDX_W    = $clog2(M)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tl_lf,      // 0: TL-OoO, 1: TL-LF
  // DDRx slave side (from the memory controller)
  input  mc_cmd_t    mc_cmd,
  input  beat_t      mc_wdata,
  output beat_t      mc_rdata,
  // master side (to the lower MECs)
  output link_cmd_t  dn_cmd,
  output beat_t      dn_wdata,
  input  link_ret_t  up_ret,
  // statistics
  output mec1_ev_t   ev
);
  typedef enum logic [1:0] {R_FAKE, R_LVC, R_MMIO_ST, R_MMIO_DATA} resp_kind_e;
  typedef struct packed {
    logic        valid;
    resp_kind_e  kind;
    logic [IDX_W-1:0] idx;
  } resp_t;

  // ---------------- decode ----------------
  wire sel = mc_cmd.cmd != CMD_NOP && mc_cmd.cs == CS_ID;
  wire is_act = sel && mc_cmd.cmd == CMD_ACT;
  wire is_pre = sel && mc_cmd.cmd == CMD_PRE;
  wire is_rd  = sel && mc_cmd.cmd == CMD_RD;
  wire is_wr  = sel && mc_cmd.cmd == CMD_WR;
  wire is_ref = sel && mc_cmd.cmd == CMD_REF;
  wire pre_all = mc_cmd.addr[A10];

  logic              bst_a_open, bst_b_open;
  logic [LROW_W-1:0] bst_a_row;
  logic [BANK_W-1:0] safe_bank;

  bank_state_table #(.N_BANKS(N_BANKS), .ROW_W(LROW_W)) u_bst (
    .clk, .rst_n,
    .act_we  (is_act),
    .act_bank(mc_cmd.bank),
    .act_row (mc_cmd.addr),
    .pre_we  (is_pre),
    .pre_all (pre_all),
    .pre_bank(mc_cmd.bank),
    .a_bank  (mc_cmd.bank),
    .a_open  (bst_a_open),
    .a_row   (bst_a_row),
    .b_bank  (safe_bank),
    .b_open  (bst_b_open),
    .b_row   ()
  );

  wire               row_shadow = bst_a_row[LROW_W-1];
  wire [RID_W-1:0]   row_rid    = bst_a_row[LROW_W-2 -: RID_W];
  wire               row_mmio   = bst_a_row == MMIO_ROW;
  wire [LADDR_W-1:0] line_addr  = {bst_a_row[LROW_W-2:0], mc_cmd.addr[COL_W-1:0], mc_cmd.bank};
  wire [COL_W-4:0]   col_group  = mc_cmd.addr[COL_W-1:3];

  // ---------------- LVC ----------------
  logic                lk_hit, alloc_ok, alloc_evict, rd_ready, inv_hit;
  logic [IDX_W-1:0]    lk_idx;
  logic [TAG_ID_W-1:0] alloc_tag_id;
  logic                alloc_en, cons_en, rel_en;
  logic [IDX_W-1:0]    rel_idx;
  logic [BEAT_W-1:0]   lvc_rd_data;
  logic [IDX_W-1:0]    burst_idx_q;
  logic [BEAT_IW-1:0]  burst_beat_q;
  resp_t               resp_in, resp_out;

  load_value_cache #(.M(M)) u_lvc (
    .clk, .rst_n,
    .lk_tag      (line_addr),
    .lk_hit      (lk_hit),
    .lk_idx      (lk_idx),
    .alloc_en    (alloc_en),
    .alloc_tag   (line_addr),
    .alloc_ok    (alloc_ok),
    .alloc_idx   (),
    .alloc_tag_id(alloc_tag_id),
    .alloc_evict (alloc_evict),
    .cons_en     (cons_en),
    .cons_idx    (lk_idx),
    .rel_en      (rel_en),
    .rel_idx     (rel_idx),
    .inv_en      (is_wr && !row_mmio),
    .inv_tag     (line_addr),
    .inv_hit     (inv_hit),
    .fill_en     (up_ret.valid && !up_ret.safe),
    .fill_tag_id (up_ret.tag_id),
    .fill_beat   (up_ret.beat),
    .fill_data   (up_ret.data),
    .rd_idx      (burst_idx_q),
    .rd_beat     (burst_beat_q),
    .rd_data     (lvc_rd_data),
    .rdy_idx     (resp_out.idx),
    .rd_ready    (rd_ready)
  );

  // ---------------- twin-load identification ----------------
  logic      fwd_rd, lf_mode_demand;
  always_comb begin
    alloc_en = 1'b0;
    cons_en  = 1'b0;
    fwd_rd   = 1'b0;
    resp_in  = '0;
    lf_mode_demand = tl_lf && row_shadow;
    if (is_rd) begin
      resp_in.valid = 1'b1;
      resp_in.kind  = R_FAKE;
      if (row_mmio) begin
        resp_in.kind = (col_group == 0) ? R_MMIO_ST : R_MMIO_DATA;
      end else if (!tl_lf) begin
        // TL-OoO: whichever load arrives first is the prefetch
        if (lk_hit) begin
          cons_en       = 1'b1;
          resp_in.kind  = R_LVC;
          resp_in.idx   = lk_idx;
        end else begin
          alloc_en = 1'b1;
          fwd_rd   = alloc_ok;
        end
      end else if (lf_mode_demand) begin
        // TL-LF demand load
        if (lk_hit) begin
          cons_en       = 1'b1;
          resp_in.kind  = R_LVC;
          resp_in.idx   = lk_idx;
        end
      end else if (!lk_hit) begin
        // TL-LF prefetch load
        alloc_en = 1'b1;
        fwd_rd   = alloc_ok;
      end
    end
  end

  // ---------------- command forwarding ----------------
  link_cmd_t fwd, inj, link_in;
  always_comb begin
    fwd = '0;
    fwd.cmd  = CMD_NOP;
    fwd.bank = mc_cmd.bank;
    fwd.rid  = row_rid;
    if (is_act && mc_cmd.addr != MMIO_ROW) begin
      fwd.cmd  = CMD_ACT;
      fwd.rid  = mc_cmd.addr[LROW_W-2 -: RID_W];
      fwd.addr = mc_cmd.addr[PROW_W-1:0];
    end else if (is_pre && pre_all) begin
      fwd.cmd   = CMD_PRE;
      fwd.bcast = 1'b1;
      fwd.addr  = PROW_W'(1) << A10;
    end else if (is_pre && !row_mmio) begin
      fwd.cmd  = CMD_PRE;
    end else if (is_ref) begin
      fwd.cmd   = CMD_REF;
      fwd.bcast = 1'b1;
    end else if (is_wr && !row_mmio) begin
      fwd.cmd  = CMD_WR;
      fwd.addr = PROW_W'(mc_cmd.addr[COL_W-1:0]);
    end else if (fwd_rd) begin
      fwd.cmd    = CMD_RD;
      fwd.addr   = PROW_W'(mc_cmd.addr[COL_W-1:0]);
      fwd.tag_id = alloc_tag_id;
    end
  end

  wire slot_free = fwd.cmd == CMD_NOP;
  assign link_in = slot_free ? inj : fwd;

  tpd_pipe #(.T(link_cmd_t), .DEPTH(T_PD_C)) u_cmd_pipe (
    .clk, .rst_n, .d(link_in), .q(dn_cmd));
  tpd_pipe #(.T(beat_t), .DEPTH(T_PD_C)) u_wd_pipe (
    .clk, .rst_n, .d(mc_wdata), .q(dn_wdata));

  // ---------------- safe path ----------------
  logic               mmio_wr_act;
  logic [BEAT_IW-1:0] mmio_wr_beat;
  logic               safe_flag, safe_busy, safe_busy_q, safe_busy_d;
  logic [BEAT_W-1:0]  safe_rd_data;

  wr_burst_track #(.SEL_W(1), .T_WL(T_WL_C), .BURST(BURST)) u_mmio_wr (
    .clk, .rst_n,
    .wr    (is_wr && row_mmio && col_group == 0),
    .sel   (1'b0),
    .active(mmio_wr_act),
    .sel_o (),
    .beat  (mmio_wr_beat)
  );

  mec1_safe_path #(.T_RCD_C(T_RCD_C), .T_RTP_C(T_RTP_C)) u_safe (
    .clk, .rst_n,
    .start     (mmio_wr_act && mmio_wr_beat == 0 && mc_wdata.valid),
    .start_addr(mc_wdata.data[LADDR_W-1:0]),
    .flag      (safe_flag),
    .busy      (safe_busy),
    .rd_beat   (burst_beat_q),
    .rd_data   (safe_rd_data),
    .bank_q_o  (safe_bank),
    .bank_open (bst_b_open),
    .slot_free (slot_free),
    .inj       (inj),
    .ret       (up_ret)
  );

  // ---------------- fixed-latency read response ----------------
  // RD at cycle t -> burst on mc_rdata at t+T_RL_C .. t+T_RL_C+BURST-1
  resp_t resp_q [T_RL_C-1];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < T_RL_C-1; i++) resp_q[i] <= '0;
    end else begin
      resp_q[0] <= resp_in;
      for (int i = 1; i < T_RL_C-1; i++) resp_q[i] <= resp_q[i-1];
    end
  end
  assign resp_out = resp_q[T_RL_C-2];

  logic       burst_q;
  resp_kind_e burst_kind_q;
  logic       burst_late;
  assign burst_late = resp_out.valid && resp_out.kind == R_LVC && !rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      burst_q      <= 1'b0;
      burst_kind_q <= R_FAKE;
      burst_idx_q  <= '0;
      burst_beat_q <= '0;
      safe_busy_q  <= 1'b0;
      safe_busy_d  <= 1'b0;
    end else begin
      safe_busy_d  <= safe_busy;
      if (resp_out.valid) begin
        burst_q      <= 1'b1;
        burst_kind_q <= burst_late ? R_FAKE : resp_out.kind;
        burst_idx_q  <= resp_out.idx;
        burst_beat_q <= '0;
        safe_busy_q  <= safe_busy;
      end else if (burst_q) begin
        burst_beat_q <= burst_beat_q + 1'b1;
        if (burst_beat_q == BEAT_IW'(BURST-1)) burst_q <= 1'b0;
      end
    end
  end

  // free a drained entry when its last beat has gone (or at once when late)
  always_comb begin
    rel_en  = 1'b0;
    rel_idx = burst_idx_q;
    if (burst_late) begin
      rel_en  = 1'b1;
      rel_idx = resp_out.idx;
    end else if (burst_q && burst_kind_q == R_LVC && burst_beat_q == BEAT_IW'(BURST-1)) begin
      rel_en  = 1'b1;
    end
  end

  always_comb begin
    mc_rdata = '0;
    if (burst_q) begin
      mc_rdata.valid = 1'b1;
      unique case (burst_kind_q)
        R_FAKE:      mc_rdata.data = FAKE_BEAT;
        R_LVC:       mc_rdata.data = lvc_rd_data;
        R_MMIO_ST:   mc_rdata.data = (burst_beat_q == 0) ?
                                     BEAT_W'({safe_busy_q, safe_flag}) : '0;
        R_MMIO_DATA: mc_rdata.data = safe_rd_data;
        default:     mc_rdata.data = FAKE_BEAT;
      endcase
    end
  end

  // ---------------- events ----------------
  always_comb begin
    ev = '0;
    ev.first_load     = is_rd && !row_mmio && fwd_rd;
    ev.second_load    = is_rd && !row_mmio && cons_en;
    ev.late_data      = burst_late;
    ev.evict          = alloc_evict && alloc_ok;
    ev.lf_demand_miss = is_rd && !row_mmio && tl_lf && row_shadow && !lk_hit;
    ev.lf_reuse       = is_rd && !row_mmio && tl_lf && !row_shadow && lk_hit;
    ev.no_alloc       = alloc_en && !alloc_ok;
    ev.wr_inval       = is_wr && !row_mmio && inv_hit;
    ev.mmio_access    = (is_rd || is_wr) && row_mmio;
    ev.safe_done      = safe_busy_d && !safe_busy;
  end

  // ---------------- protocol rules at the slave side ----------------
  // A RD or WR must name an open bank (DDRx rule the controller follows).
  assert property (@(posedge clk) disable iff (!rst_n)
                   (is_rd || is_wr) |-> bst_a_open)
    else $error("mec1: RD/WR to a closed bank");
  // Read bursts never overlap: a new response starts only after the last one.
  assert property (@(posedge clk) disable iff (!rst_n)
                   resp_out.valid |-> (!burst_q || burst_beat_q == BEAT_IW'(BURST-1)))
    else $error("mec1: read bursts overlap (RDs closer than tCCD)");

  initial assert (T_RL_C >= 2) else $error("mec1: T_RL_C must be at least 2");
endmodule
