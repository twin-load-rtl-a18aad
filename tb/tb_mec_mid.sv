// tb_mec_mid: a middle MEC owning rank IDs 0..7 (fanout 2, span 4). Checks
// that each command reaches only the child the routing table names, exactly
// T_PD cycles later; that commands for foreign IDs are dropped and
// broadcasts reach both children; that write data follow their WR to the
// same child T_WL cycles later; and that returns from either child reach the
// parent unchanged T_PD cycles later.
//
// How: a 100-time-unit clock; commands are driven on the parent port and the
// child ports are sampled every cycle, so a command seen early, late, twice or
// on the wrong port is a failure. Forwarding by DIMM ID through a routing
// table is the paper's; broadcast handling and the per-hop delay are this
// design's choices. A watchdog ends a hung run.
module tb_mec_mid;
  import tl_pkg::*;
  logic clk = 0, rst_n = 0;
  link_cmd_t up_cmd, dn_cmd [2];
  beat_t     up_wdata, dn_wdata [2];
  link_ret_t up_ret, dn_ret [2];
  int checks = 0, failures = 0;

  mec_mid #(.FANOUT(2), .BASE(0), .SPAN(4)) u_dut (
    .clk, .rst_n, .up_cmd, .up_wdata, .up_ret, .dn_cmd, .dn_wdata, .dn_ret,
    .cfg_we(1'b0), .cfg_id('0), .cfg_valid(1'b0), .cfg_port(1'b0));
  always #50 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // drive one command for one cycle, then check both ports for T_PD cycles
  task automatic send(ddr_cmd_e c, int rid, bit bc, bit exp0, bit exp1);
    link_cmd_t m = '0;
    m.cmd = c; m.rid = RID_W'(rid); m.bcast = bc; m.bank = 3'(rid); m.addr = PROW_W'($urandom);
    m.tag_id = 8'($urandom);
    up_cmd = m;
    @(negedge clk); up_cmd = '0;
    for (int k = 1; k <= T_PD; k++) begin
      bit last = (k == T_PD);
      if (!last) begin
        chk(dn_cmd[0].cmd == CMD_NOP && dn_cmd[1].cmd == CMD_NOP, "nothing before T_PD");
      end else begin
        chk(exp0 ? dn_cmd[0] == m : dn_cmd[0].cmd == CMD_NOP, $sformatf("port 0, %s rid %0d", c.name(), rid));
        chk(exp1 ? dn_cmd[1] == m : dn_cmd[1].cmd == CMD_NOP, $sformatf("port 1, %s rid %0d", c.name(), rid));
      end
      @(negedge clk);
    end
    chk(dn_cmd[0].cmd == CMD_NOP && dn_cmd[1].cmd == CMD_NOP, "one cycle only");
  endtask

  initial begin
    logic [BEAT_W-1:0] d [BURST];
    up_cmd = '0; up_wdata = '0; dn_ret[0] = '0; dn_ret[1] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    send(CMD_ACT, 2, 0, 1, 0);
    send(CMD_ACT, 6, 0, 0, 1);
    send(CMD_RD, 3, 0, 1, 0);
    send(CMD_PRE, 9, 0, 0, 0);     // another MEC's rank
    send(CMD_REF, 0, 1, 1, 1);     // broadcast
    // write to rank 5 (port 1): data T_WL cycles after the WR
    begin
      link_cmd_t m = '0;
      m.cmd = CMD_WR; m.rid = 5;
      up_cmd = m;
      @(negedge clk); up_cmd = '0;
      repeat (T_WL - 1) @(negedge clk);
      for (int b = 0; b < BURST; b++) begin
        d[b] = {$urandom, $urandom, $urandom, $urandom};
        up_wdata = '{valid: 1'b1, data: d[b]};
        @(negedge clk);
      end
      up_wdata = '{valid: 1'b1, data: '1};   // stray beat: not part of a burst
      @(negedge clk); up_wdata = '0;
      repeat (T_PD - BURST - 1 + BURST) @(negedge clk);
    end
    checks++;
    if (wbeats1 != BURST || wbeats0 != 0) begin
      failures++; $display("FAIL: write beats port0=%0d port1=%0d", wbeats0, wbeats1);
    end
    // returns from child 0 then child 1
    for (int p = 0; p < 2; p++) begin
      automatic link_ret_t r = '{valid: 1'b1, safe: 1'(p), tag_id: 8'(p + 3), beat: 2'(p), data: {4{$urandom}}};
      dn_ret[p] = r;
      @(negedge clk); dn_ret[p] = '0;
      repeat (T_PD - 1) begin chk(!up_ret.valid, "return not early"); @(negedge clk); end
      chk(up_ret == r, $sformatf("return from child %0d", p));
      @(negedge clk);
      chk(!up_ret.valid, "return one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // write-data monitor: beats must appear on port 1 only, T_PD after input
  int wbeats1 = 0, wbeats0 = 0;
  always @(posedge clk) begin
    if (rst_n && dn_wdata[0].valid) wbeats0++;
    if (rst_n && dn_wdata[1].valid) wbeats1++;
  end
endmodule
