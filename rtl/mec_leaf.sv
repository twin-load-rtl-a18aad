// mec_leaf: a leaf Memory Extending Chip driving one dual-rank DIMM.
// It executes the commands addressed to its DIMM (rank IDs RID_BASE and
// RID_BASE+1; others on a shared bus are ignored): the low bit of the rank
// ID selects the rank (PRE-all and REF select both), bank and address pass
// unchanged, and write data follow their WR by T_WL cycles as DDRx requires.
// For every RD it remembers the prefetch's tag ({generation, LVC entry}, or
// the safe-path marker) in a small FIFO; when the DIMM returns the burst
// tRL later, each beat is sent up the tree with that tag, which is how MEC1
// finds the LVC entry the data belong to.
//
// Timing: T_PD_C cycles from the parent link to the DIMM pins and from the
// DIMM's data back to the parent link. Up to TAG_DEPTH reads may be in flight
// (tRL/tCCD rounded up; 4 by default).
module mec_leaf
  import tl_pkg::*;
#(
  parameter int unsigned RID_BASE  = 0,      // rank ID of rank 0 of this DIMM (even)
  parameter int unsigned T_PD_C    = T_PD,
  parameter int unsigned T_WL_C    = T_WL,
  parameter int unsigned TAG_DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // parent link
  input  link_cmd_t  up_cmd,
  input  beat_t      up_wdata,
  output link_ret_t  up_ret,
  // DIMM
  output dram_cmd_t  dram_cmd,
  output beat_t      dram_wdata,
  input  beat_t      dram_rdata
);
  localparam int unsigned TP_W = $clog2(TAG_DEPTH);
  typedef struct packed {
    logic                safe;
    logic [TAG_ID_W-1:0] tag_id;
  } tag_t;

  // ---------------- command and write data to the DIMM ----------------
  // Commands for other DIMMs on a shared parent bus are ignored.
  wire mine = up_cmd.cmd != CMD_NOP &&
              (up_cmd.bcast || up_cmd.rid[RID_W-1:1] == (RID_W-1)'(RID_BASE >> 1));
  dram_cmd_t dc;
  always_comb begin
    dc      = '0;
    dc.cmd  = mine ? up_cmd.cmd : CMD_NOP;
    dc.cs   = up_cmd.bcast ? 2'b11 : (up_cmd.rid[0] ? 2'b10 : 2'b01);
    dc.bank = up_cmd.bank;
    dc.addr = up_cmd.addr;
    if (!mine) dc.cs = 2'b00;
  end

  logic  wr_act;
  beat_t wd;
  wr_burst_track #(.SEL_W(1), .T_WL(T_WL_C)) u_wr (
    .clk, .rst_n,
    .wr    (mine && up_cmd.cmd == CMD_WR),
    .sel   (1'b0),
    .active(wr_act),
    .sel_o (),
    .beat  ()
  );
  assign wd = wr_act ? up_wdata : '0;

  // The tag rides along with the RD so it enters the FIFO when the DIMM sees it.
  tag_t tag_in, tag_dram;
  logic rd_in, rd_dram;
  assign tag_in = '{safe: up_cmd.safe, tag_id: up_cmd.tag_id};
  assign rd_in  = mine && up_cmd.cmd == CMD_RD;

  tpd_pipe #(.T(dram_cmd_t), .DEPTH(T_PD_C)) u_cp (.clk, .rst_n, .d(dc), .q(dram_cmd));
  tpd_pipe #(.T(beat_t),     .DEPTH(T_PD_C)) u_wp (.clk, .rst_n, .d(wd), .q(dram_wdata));
  tpd_pipe #(.T(tag_t),      .DEPTH(T_PD_C)) u_tp (.clk, .rst_n, .d(tag_in), .q(tag_dram));
  tpd_pipe #(.T(logic),      .DEPTH(T_PD_C)) u_rp (.clk, .rst_n, .d(rd_in), .q(rd_dram));

  // ---------------- tag FIFO ----------------
  tag_t              fifo_q [TAG_DEPTH];
  logic [TP_W-1:0]   wp_q, rp_q;
  logic [TP_W:0]     cnt_q;
  logic [BEAT_IW-1:0] beat_q;
  wire  last_beat = dram_rdata.valid && beat_q == BEAT_IW'(BURST-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q   <= '0;
      rp_q   <= '0;
      cnt_q  <= '0;
      beat_q <= '0;
      for (int i = 0; i < TAG_DEPTH; i++) fifo_q[i] <= '0;
    end else begin
      if (rd_dram) begin
        fifo_q[wp_q] <= tag_dram;
        wp_q <= wp_q + 1'b1;
      end
      if (dram_rdata.valid) beat_q <= beat_q + 1'b1;
      if (last_beat) rp_q <= rp_q + 1'b1;
      cnt_q <= cnt_q + (TP_W+1)'(rd_dram) - (TP_W+1)'(last_beat);
    end
  end

  link_ret_t ret;
  always_comb begin
    ret        = '0;
    ret.valid  = dram_rdata.valid;
    ret.safe   = fifo_q[rp_q].safe;
    ret.tag_id = fifo_q[rp_q].tag_id;
    ret.beat   = beat_q;
    ret.data   = dram_rdata.data;
  end
  tpd_pipe #(.T(link_ret_t), .DEPTH(T_PD_C)) u_ret (.clk, .rst_n, .d(ret), .q(up_ret));

  assert property (@(posedge clk) disable iff (!rst_n) dram_rdata.valid |-> cnt_q != 0)
    else $error("mec_leaf: read data without a read");
  assert property (@(posedge clk) disable iff (!rst_n) rd_dram |-> cnt_q != (TP_W+1)'(TAG_DEPTH))
    else $error("mec_leaf: tag FIFO overflow");
endmodule
