// tb_mec1: MEC1 on its own, with a simple responder standing in for the MEC
// tree: every RD that leaves MEC1 is answered RT cycles later with the four
// beats of the addressed line, tagged with the RD's entry ID. The controller
// side is checked cycle by cycle: every beat must appear exactly tRL cycles
// after its RD, holding the placeholder or the true line.
// Covered: command forwarding (rank ID from the row, column, T_PD delay),
// chip-select filtering, a TL-OoO twin-load, the reverse order (shadow
// address first), a second load that comes before the data (placeholder),
// TL-LF demand miss, write forwarding with LVC invalidation.
module tb_mec1;
  import tl_pkg::*;
  logic clk = 0, rst_n = 0, tl_lf = 0;
  mc_cmd_t   mc_cmd;
  beat_t     mc_wdata, mc_rdata, dn_wdata;
  link_cmd_t dn_cmd;
  link_ret_t up_ret;
  mec1_ev_t  ev;
  int checks = 0, failures = 0;

  mec1 u_dut (.*);
  always #50 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint cyc = 0;
  int RT = 20;                         // responder round trip (cycles)
  logic [BEAT_W-1:0] exp_data [longint];
  link_ret_t         resp_at  [longint];
  int unsigned       row_of   [int];   // {rid, bank} -> physical row
  link_cmd_t         dn_log[$];
  int                n_first = 0, n_second = 0, n_late = 0, n_lfm = 0, n_inv = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (exp_data.exists(cyc)) begin
        checks++;
        if (!mc_rdata.valid || mc_rdata.data !== exp_data[cyc]) begin
          failures++;
          $display("FAIL cycle %0d: got %0b %h expected %h", cyc, mc_rdata.valid, mc_rdata.data, exp_data[cyc]);
        end
      end else if (mc_rdata.valid) begin
        failures++; $display("FAIL cycle %0d: unexpected beat", cyc);
      end
      // responder
      if (dn_cmd.cmd != CMD_NOP) dn_log.push_back(dn_cmd);
      if (dn_cmd.cmd == CMD_ACT) row_of[{dn_cmd.rid, dn_cmd.bank}] = dn_cmd.addr;
      if (dn_cmd.cmd == CMD_RD)
        for (int b = 0; b < BURST; b++)
          resp_at[cyc + RT + b] = '{valid: 1'b1, safe: 1'b0, tag_id: dn_cmd.tag_id, beat: 2'(b),
              data: tb_pkg::dram_pattern(0, dn_cmd.rid, dn_cmd.bank, row_of[{dn_cmd.rid, dn_cmd.bank}],
                                         dn_cmd.addr, b)};
      n_first  += int'(ev.first_load);
      n_second += int'(ev.second_load);
      n_late   += int'(ev.late_data);
      n_lfm    += int'(ev.lf_demand_miss);
      n_inv    += int'(ev.wr_inval);
    end
    cyc <= cyc + 1;
    up_ret <= resp_at.exists(cyc + 1) ? resp_at[cyc + 1] : '0;
  end

  task automatic issue(ddr_cmd_e c, bit cs, int bank, logic [ADDR_W-1:0] addr);
    mc_cmd = '{cmd: c, cs: cs, bank: 3'(bank), addr: addr};
    @(negedge clk); mc_cmd = '0;
  endtask
  task automatic gap(int n); repeat (n) @(negedge clk); endtask
  function automatic logic [ADDR_W-1:0] lrow(bit sh, int rid, int row);
    return {sh, RID_W'(rid), PROW_W'(row)};
  endfunction
  // RD now; expect the placeholder (kind 0) or the true line (kind 1)
  task automatic rd(int bank, int col, int kind, int rid, int row);
    for (int b = 0; b < BURST; b++)
      exp_data[cyc + T_RL + b] = kind ? tb_pkg::dram_pattern(0, rid, bank, row, col, b) : FAKE_BEAT;
    issue(CMD_RD, 0, bank, ADDR_W'(col));
  endtask
  // twin-load: first address (sh1), row miss, second address
  task automatic pair(int rid, int bank, int row, int col, bit sh1, int kind2);
    issue(CMD_ACT, 0, bank, lrow(sh1, rid, row)); gap(T_RCD - 1);
    rd(bank, col, 0, rid, row);                    gap(T_RTP - 1);
    issue(CMD_PRE, 0, bank, '0);                   gap(T_RP - 1);
    issue(CMD_ACT, 0, bank, lrow(!sh1, rid, row)); gap(T_RCD - 1);
    rd(bank, col, kind2, rid, row);                gap(T_RTP - 1);
    issue(CMD_PRE, 0, bank, '0);                   gap(T_RP + 20);
  endtask

  initial begin
    link_cmd_t c;
    mc_cmd = '0; mc_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    gap(3);
    // forwarding of ACT: rank ID from the row, T_PD later
    issue(CMD_ACT, 0, 3, lrow(0, 5, 'h321));
    gap(T_PD - 1);
    chk(dn_cmd.cmd == CMD_ACT && dn_cmd.rid == 5 && dn_cmd.addr == 'h321 && dn_cmd.bank == 3, "ACT forwarded after T_PD");
    // PRE carries the rank ID from the BST
    issue(CMD_PRE, 0, 3, '0);
    gap(T_PD - 1);
    chk(dn_cmd.cmd == CMD_PRE && dn_cmd.rid == 5, "PRE forwarded with rank ID from BST");
    // the other chip select is not this MEC1's
    issue(CMD_ACT, 1, 4, lrow(0, 6, 'h1));
    gap(T_PD + 2);
    chk(dn_log.size() == 2, "other chip select ignored");
    // TL-OoO twin-loads, in both address orders
    pair(9, 1, 'h4321, 'h18, 0, 1);
    pair(2, 6, 'h0777, 'h30, 1, 1);
    // data slower than the row-miss gap: second load gets the placeholder
    RT = 40;
    pair(4, 2, 'h0100, 'h08, 0, 0);
    RT = 20;
    // write: forwarded with data, invalidates a buffered line
    issue(CMD_ACT, 0, 5, lrow(0, 3, 'h55)); gap(T_RCD - 1);
    rd(5, 'h20, 0, 3, 'h55);                 gap(T_CCD - 1);     // lone first load
    issue(CMD_WR, 0, 5, ADDR_W'('h20));      gap(T_WL - 1);
    for (int b = 0; b < BURST; b++) begin mc_wdata = '{valid: 1'b1, data: BEAT_W'(b + 1)}; @(negedge clk); end
    mc_wdata = '0;
    rd(5, 'h20, 0, 3, 'h55);                 gap(T_RTP - 1);     // miss again: new prefetch
    issue(CMD_PRE, 0, 5, '0); gap(40);
    c = dn_log[dn_log.size() - 3];
    chk(c.cmd == CMD_WR && c.rid == 3 && c.addr == 'h20, "WR forwarded");
    // TL-LF: shadow load without prefetch returns the placeholder
    tl_lf = 1;
    issue(CMD_ACT, 0, 0, lrow(1, 1, 'h9)); gap(T_RCD - 1);
    rd(0, 'h0, 0, 1, 'h9);                 gap(T_RTP - 1);
    issue(CMD_PRE, 0, 0, '0); gap(T_RP + 20);
    pair(1, 0, 'h9, 'h8, 0, 1);            // fenced pair works
    tl_lf = 0;
    chk(n_first == 6 && n_second == 4 && n_late == 1 && n_lfm == 1 && n_inv == 1,
        $sformatf("events first=%0d second=%0d late=%0d lfmiss=%0d inval=%0d", n_first, n_second, n_late, n_lfm, n_inv));
    chk(wd_ok == BURST, $sformatf("%0d write beats forwarded", wd_ok));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // write data are forwarded
  int wd_ok = 0;
  always @(posedge clk) if (rst_n && dn_wdata.valid) wd_ok++;
endmodule
