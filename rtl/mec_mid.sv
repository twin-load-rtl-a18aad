// mec_mid: a middle-layer Memory Extending Chip.
// Lower MECs are much simpler than MEC1: they hold no BST or LVC and only
// execute or forward what they receive. A middle MEC looks up the command's
// rank ID (carried with every command; MEC1 takes it from the row of an ACT,
// or from its BST for other commands) in its routing table and forwards the
// command to that child port; PRE-all and REF go to every child. Write data
// follow the WR they belong to, T_WL cycles later, to the same port. Read
// data returned by any child are passed up unchanged, still tagged with the
// LVC entry ID of the prefetch.
//
// Timing: T_PD_C cycles from the parent link to a child link and again from a
// child back to the parent (3.4 ns per direction in the paper, rounded to 3
// cycles). Returns from two children never coincide because DDRx reads are
// at least a burst apart on the controller's channel.
module mec_mid
  import tl_pkg::*;
#(
  parameter int unsigned FANOUT = 2,
  parameter int unsigned BASE   = 0,
  parameter int unsigned SPAN   = 8,
  parameter int unsigned T_PD_C = T_PD,
  parameter int unsigned T_WL_C = T_WL,
  localparam int unsigned PORT_W = (FANOUT > 1) ? $clog2(FANOUT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // parent link
  input  link_cmd_t         up_cmd,
  input  beat_t             up_wdata,
  output link_ret_t         up_ret,
  // child links
  output link_cmd_t         dn_cmd   [FANOUT],
  output beat_t             dn_wdata [FANOUT],
  input  link_ret_t         dn_ret   [FANOUT],
  // routing-table configuration
  input  logic              cfg_we,
  input  logic [RID_W-1:0]  cfg_id,
  input  logic              cfg_valid,
  input  logic [PORT_W-1:0] cfg_port
);
  logic              rt_hit;
  logic [PORT_W-1:0] rt_port;

  routing_table #(.FANOUT(FANOUT), .BASE(BASE), .SPAN(SPAN)) u_rt (
    .clk, .rst_n,
    .id(up_cmd.rid), .hit(rt_hit), .port(rt_port),
    .cfg_we, .cfg_id, .cfg_valid, .cfg_port
  );

  logic              wr_act;
  logic [PORT_W-1:0] wr_sel;
  wr_burst_track #(.SEL_W(PORT_W), .T_WL(T_WL_C)) u_wr (
    .clk, .rst_n,
    .wr    (up_cmd.cmd == CMD_WR && rt_hit),
    .sel   (rt_port),
    .active(wr_act),
    .sel_o (wr_sel),
    .beat  ()
  );

  for (genvar p = 0; p < FANOUT; p++) begin : g_port
    link_cmd_t c;
    beat_t     w;
    always_comb begin
      c = up_cmd;
      if (up_cmd.cmd == CMD_NOP ||
          !(up_cmd.bcast || (rt_hit && rt_port == PORT_W'(p)))) begin
        c = '0;
        c.cmd = CMD_NOP;
      end
      w = (wr_act && wr_sel == PORT_W'(p)) ? up_wdata : '0;
    end
    tpd_pipe #(.T(link_cmd_t), .DEPTH(T_PD_C)) u_cp (.clk, .rst_n, .d(c), .q(dn_cmd[p]));
    tpd_pipe #(.T(beat_t),     .DEPTH(T_PD_C)) u_wp (.clk, .rst_n, .d(w), .q(dn_wdata[p]));
  end

  // merge the children's return links
  link_ret_t ret_m;
  always_comb begin
    ret_m = '0;
    for (int p = 0; p < FANOUT; p++) begin
      if (dn_ret[p].valid) ret_m = dn_ret[p];
    end
  end
  tpd_pipe #(.T(link_ret_t), .DEPTH(T_PD_C)) u_rp (.clk, .rst_n, .d(ret_m), .q(up_ret));

  // at most one child returns data in any cycle
  logic [FANOUT-1:0] ret_v;
  always_comb for (int p = 0; p < FANOUT; p++) ret_v[p] = dn_ret[p].valid;
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ret_v))
    else $error("mec_mid: return collision");
endmodule
