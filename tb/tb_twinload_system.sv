// tb_twinload_system: end-to-end test of the twin-load memory system at its
// default size (2 MEC1s, four layers, 16 leaf MECs, 32 DRAM ranks).
//
// The testbench plays the unmodified memory controller and the software
// twin-load routines. It schedules DDRx commands under the same-bank timing
// rules (tRCD, tRTP, tRP, tCCD between column commands), and for every RD it
// knows which line must appear on the data bus exactly tRL cycles later: the
// 0x5a placeholder or the true line, computed from the DRAM models' address
// pattern and the writes done so far. Every beat and every idle cycle of the
// data bus is compared. Scenarios:
//   1  TL-OoO twin-load (extended address, then shadow address: row miss)
//   2  eight concurrent twin-loads to eight banks of the second MEC1
//   3  writes through the extended and the shadow address, read back
//   4  a lone first load leaves a line in the LVC; a write must invalidate it
//   5  two loads to one line back to back: the second finds no data yet
//   6  seventeen first loads overflow the 16-entry LVC (LRU eviction), and the
//      software retry that follows
//   7  TL-LF mode: fenced twin-load, a demand load that misses, a repeated
//      prefetch load
//   8  the safe path through the memory-mapped registers
//   9  precharge-all and refresh reach every DIMM
// Each mechanism's event count must be non-zero, and the DRAM models must
// report no timing violation.
module tb_twinload_system;
  import tl_pkg::*;

  localparam int unsigned NLEAF  = 8;
  localparam int unsigned N_DIMM = 16;

  logic      clk = 1'b0;
  logic      rst_n = 1'b0;
  logic      tl_lf = 1'b0;
  mc_cmd_t   mc_cmd;
  beat_t     mc_wdata;
  beat_t     mc_rdata;
  dram_cmd_t dram_cmd   [N_DIMM];
  beat_t     dram_wdata [N_DIMM];
  beat_t     dram_rdata [N_DIMM];
  mec1_ev_t  ev         [2];
  int unsigned viol [N_DIMM], nref [N_DIMM], nrd [N_DIMM], nwr [N_DIMM];

  twinload_system u_dut (
    .clk, .rst_n, .tl_lf,
    .mc_cmd, .mc_wdata, .mc_rdata,
    .dram_cmd, .dram_wdata, .dram_rdata,
    .ev
  );

  for (genvar d = 0; d < N_DIMM; d++) begin : g_dimm
    dram_dimm_model #(.TREE(d / NLEAF), .RID_BASE(2 * (d % NLEAF))) u_dimm (
      .clk, .cmd(dram_cmd[d]), .wdata(dram_wdata[d]), .rdata(dram_rdata[d]),
      .violations(viol[d]), .n_ref(nref[d]), .n_rd(nrd[d]), .n_wr(nwr[d])
    );
  end

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;

  // ---------------- schedule and expectations ----------------
  mc_cmd_t           sched_cmd [longint];
  beat_t             sched_wd  [longint];
  bit                col_at    [longint];
  logic [BEAT_W-1:0] exp_data  [longint];
  bit                exp_dc    [longint];
  logic [BEAT_W-1:0] written   [longint];   // lines written so far

  function automatic longint wkey(int t, int rid, int bank, int row, int col, int beat);
    return longint'({8'(t), 8'(rid), 8'(bank), 16'(row), 16'(col), 8'(beat)});
  endfunction
  function automatic logic [BEAT_W-1:0] true_beat(int t, int rid, int bank, int row, int col, int beat);
    longint k = wkey(t, rid, bank, row, col, beat);
    return written.exists(k) ? written[k] : tb_pkg::dram_pattern(t, rid, bank, row, col, beat);
  endfunction
  function automatic logic [ADDR_W-1:0] lrow(bit sh, int rid, int row);
    return {sh, RID_W'(rid), PROW_W'(row)};
  endfunction

  function automatic bit col_busy(longint t);
    for (longint d = -3; d <= 3; d++) if (col_at.exists(t + d)) return 1;
    return 0;
  endfunction

  longint last_at = 0;
  task automatic place(input longint earliest, input ddr_cmd_e c, input int cs, input int bank,
                       input logic [ADDR_W-1:0] addr, output longint at);
    bit is_col = (c == CMD_RD || c == CMD_WR);
    mc_cmd_t m;
    at = earliest;
    while (sched_cmd.exists(at) || (is_col && col_busy(at))) at++;
    m.cmd = c; m.cs = 1'(cs); m.bank = BANK_W'(bank); m.addr = addr;
    sched_cmd[at] = m;
    if (is_col) col_at[at] = 1;
    if (at > last_at) last_at = at;
  endtask

  // kind: 0 placeholder, 1 true line of (t,rid,bank,row,col), 2 don't care
  task automatic expect_rd(input longint at, input int kind, input int t, input int rid,
                           input int bank, input int row, input int col);
    for (int b = 0; b < BURST; b++) begin
      longint c = at + T_RL + b;
      exp_dc[c]   = (kind == 2);
      exp_data[c] = (kind == 0) ? FAKE_BEAT : true_beat(t, rid, bank, row, col, b);
    end
  endtask
  task automatic expect_line(input longint at, input logic [BEAT_W-1:0] l [BURST]);
    for (int b = 0; b < BURST; b++) begin
      exp_dc[at + T_RL + b]   = 0;
      exp_data[at + T_RL + b] = l[b];
    end
  endtask

  // write a line: ACT, WR, data tWL later, PRE
  task automatic wr_line(input longint start, input int t, input bit sh, input int rid,
                         input int bank, input int row, input int col, output longint fin);
    longint a, w, p;
    place(start, CMD_ACT, t, bank, lrow(sh, rid, row), a);
    place(a + T_RCD, CMD_WR, t, bank, ADDR_W'(col), w);
    for (int b = 0; b < BURST; b++) begin
      logic [BEAT_W-1:0] v = {$urandom, $urandom, $urandom, $urandom};
      sched_wd[w + T_WL + b] = '{valid: 1'b1, data: v};
      written[wkey(t, rid, bank, row, col, b)] = v;
    end
    place(w + T_WL + BURST + 12, CMD_PRE, t, bank, '0, p);
    fin = p + T_RP;
  endtask

  // one twin-load: extended address, then the shadow address (a row miss)
  task automatic tl_pair(input longint start, input int t, input int rid, input int bank,
                         input int row, input int col, output longint fin);
    longint a1, r1, p1, a2, r2, p2;
    place(start,      CMD_ACT, t, bank, lrow(0, rid, row), a1);
    place(a1 + T_RCD, CMD_RD,  t, bank, ADDR_W'(col), r1);
    place(r1 + T_RTP, CMD_PRE, t, bank, '0, p1);
    place(p1 + T_RP,  CMD_ACT, t, bank, lrow(1, rid, row), a2);
    place(a2 + T_RCD, CMD_RD,  t, bank, ADDR_W'(col), r2);
    place(r2 + T_RTP, CMD_PRE, t, bank, '0, p2);
    expect_rd(r1, 0, t, rid, bank, row, col);
    expect_rd(r2, 1, t, rid, bank, row, col);
    fin = p2 + T_RP;
  endtask

  // run the schedule to its end and let the data bus drain
  task automatic run_to_end();
    while (cyc < last_at + T_RL + 2*BURST + 4) @(posedge clk);
  endtask

  // ---------------- drive and monitor ----------------
  int n_first, n_second, n_late, n_evict, n_lf_miss, n_lf_reuse, n_noalloc, n_inval, n_mmio, n_safe;
  always @(posedge clk) begin
    if (rst_n) begin
      // data bus in the cycle that just ended
      if (exp_data.exists(cyc)) begin
        checks++;
        if (!mc_rdata.valid || (!exp_dc[cyc] && mc_rdata.data !== exp_data[cyc])) begin
          failures++;
          $display("FAIL cycle %0d: data bus valid=%0b %h, expected %h", cyc,
                   mc_rdata.valid, mc_rdata.data, exp_data[cyc]);
        end
      end else if (mc_rdata.valid) begin
        failures++;
        $display("FAIL cycle %0d: unexpected data beat", cyc);
      end
      for (int t = 0; t < 2; t++) begin
        n_first    += int'(ev[t].first_load);
        n_second   += int'(ev[t].second_load);
        n_late     += int'(ev[t].late_data);
        n_evict    += int'(ev[t].evict);
        n_lf_miss  += int'(ev[t].lf_demand_miss);
        n_lf_reuse += int'(ev[t].lf_reuse);
        n_noalloc  += int'(ev[t].no_alloc);
        n_inval    += int'(ev[t].wr_inval);
        n_mmio     += int'(ev[t].mmio_access);
        n_safe     += int'(ev[t].safe_done);
      end
    end
    cyc <= cyc + 1;
    mc_cmd   <= sched_cmd.exists(cyc + 1) ? sched_cmd[cyc + 1] : '0;
    mc_wdata <= sched_wd.exists(cyc + 1)  ? sched_wd[cyc + 1]  : '0;
  end

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- scenarios ----------------
  initial begin : main
    longint s, f, a, r, p;
    logic [BEAT_W-1:0] l [BURST];
    n_first = 0; n_second = 0; n_late = 0; n_evict = 0; n_lf_miss = 0; n_lf_reuse = 0;
    n_noalloc = 0; n_inval = 0; n_mmio = 0; n_safe = 0;
    mc_cmd = '0; mc_wdata = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // 1: single TL-OoO twin-load
    tl_pair(cyc + 5, 0, 3, 2, 'h1234, 'h40, f);
    run_to_end();

    // 2: eight concurrent twin-loads, one per bank
    s = cyc + 5;
    for (int k = 0; k < 8; k++) tl_pair(s, 1, 2*k + 1, k, 'h100 + k, 8*k, f);
    run_to_end();

    // 3: writes via the extended and via the shadow address, then read back
    wr_line(cyc + 5, 0, 0, 5, 1, 'h77, 'h10, f);
    wr_line(cyc + 5, 1, 1, 14, 2, 'h88, 'h20, f);
    tl_pair(f, 0, 5, 1, 'h77, 'h10, f);
    tl_pair(f, 1, 14, 2, 'h88, 'h20, f);
    run_to_end();

    // 4: a lone first load, then a write to the line, then a twin-load
    place(cyc + 5, CMD_ACT, 0, 4, lrow(0, 7, 'h99), a);
    place(a + T_RCD, CMD_RD, 0, 4, 'h28, r);
    expect_rd(r, 0, 0, 7, 4, 'h99, 'h28);
    place(r + T_RTP, CMD_PRE, 0, 4, '0, p);
    wr_line(p + T_RP, 0, 0, 7, 4, 'h99, 'h28, f);
    tl_pair(f, 0, 7, 4, 'h99, 'h28, f);
    run_to_end();

    // 5: second load before the prefetched data have arrived
    place(cyc + 5, CMD_ACT, 1, 0, lrow(0, 2, 'h31), a);
    place(a + T_RCD, CMD_RD, 1, 0, 'h08, r);
    expect_rd(r, 0, 1, 2, 0, 'h31, 'h08);
    place(r + T_CCD, CMD_RD, 1, 0, 'h08, r);
    expect_rd(r, 0, 1, 2, 0, 'h31, 'h08);
    place(r + T_RTP, CMD_PRE, 1, 0, '0, p);
    run_to_end();

    // 6: LVC overflow (17 first loads), LRU eviction and software retry
    place(cyc + 5, CMD_ACT, 0, 3, lrow(0, 9, 'h555), a);
    r = a + T_RCD;
    for (int k = 0; k <= 16; k++) begin
      place(r, CMD_RD, 0, 3, ADDR_W'(8*k), r);
      expect_rd(r, 0, 0, 9, 3, 'h555, 8*k);
      r = r + T_CCD;
    end
    place(r + T_RTP, CMD_PRE, 0, 3, '0, p);
    place(p + T_RP, CMD_ACT, 0, 3, lrow(1, 9, 'h555), a);
    place(a + T_RCD, CMD_RD, 0, 3, 'h0, r);          // evicted: taken as a first load
    expect_rd(r, 0, 0, 9, 3, 'h555, 0);
    place(r + T_CCD, CMD_RD, 0, 3, 'h10, s);         // still buffered: true data
    expect_rd(s, 1, 0, 9, 3, 'h555, 'h10);
    place(r + 40, CMD_RD, 0, 3, 'h0, r);             // retry of the evicted line
    expect_rd(r, 1, 0, 9, 3, 'h555, 0);
    place(r + T_RTP, CMD_PRE, 0, 3, '0, p);
    run_to_end();

    // 7: TL-LF mode
    tl_lf = 1'b1;
    tl_pair(cyc + 5, 1, 6, 4, 'h2222, 'h18, f);
    place(f, CMD_ACT, 1, 5, lrow(1, 6, 'h3333), a);  // demand load with no prefetch
    place(a + T_RCD, CMD_RD, 1, 5, 'h18, r);
    expect_rd(r, 0, 1, 6, 5, 'h3333, 'h18);
    place(r + T_RTP, CMD_PRE, 1, 5, '0, p);
    place(cyc + 5, CMD_ACT, 1, 6, lrow(0, 6, 'h4444), a);  // prefetch twice, then demand
    place(a + T_RCD, CMD_RD, 1, 6, 'h38, r);
    expect_rd(r, 0, 1, 6, 6, 'h4444, 'h38);
    place(r + 2*T_CCD, CMD_RD, 1, 6, 'h38, r);
    expect_rd(r, 0, 1, 6, 6, 'h4444, 'h38);
    place(r + T_RTP, CMD_PRE, 1, 6, '0, p);
    place(p + T_RP, CMD_ACT, 1, 6, lrow(1, 6, 'h4444), a);
    place(a + T_RCD, CMD_RD, 1, 6, 'h38, r);
    expect_rd(r, 1, 1, 6, 6, 'h4444, 'h38);
    place(r + T_RTP, CMD_PRE, 1, 6, '0, p);
    run_to_end();
    tl_lf = 1'b0;

    // 8: safe path: address register, flag register, data register
    place(cyc + 5, CMD_ACT, 0, 7, '1, a);
    place(a + T_RCD, CMD_WR, 0, 7, 'h0, r);
    sched_wd[r + T_WL] = '{valid: 1'b1,
                           data: BEAT_W'({RID_W'(12), PROW_W'('h0abc), COL_W'('h30), BANK_W'(5)})};
    for (int b = 1; b < BURST; b++) sched_wd[r + T_WL + b] = '{valid: 1'b1, data: '0};
    place(r + 200, CMD_RD, 0, 7, 'h0, r);
    l[0] = BEAT_W'(1); l[1] = '0; l[2] = '0; l[3] = '0;   // flag = 1, busy = 0
    expect_line(r, l);
    place(r + T_CCD, CMD_RD, 0, 7, 'h8, r);
    expect_rd(r, 1, 0, 12, 5, 'h0abc, 'h30);
    place(r + T_RTP, CMD_PRE, 0, 7, '0, p);
    run_to_end();

    // 9: precharge-all and refresh on both logical ranks
    place(cyc + 5, CMD_PRE, 0, 0, ADDR_W'(1) << A10, p);
    place(p + 1, CMD_PRE, 1, 0, ADDR_W'(1) << A10, p);
    place(p + T_RP, CMD_REF, 0, 0, '0, p);
    place(p + 1, CMD_REF, 1, 0, '0, p);
    run_to_end();
    repeat (20) @(posedge clk);

    // ---------------- summary ----------------
    begin
      int unsigned vtot = 0, rtot = 0;
      for (int d = 0; d < N_DIMM; d++) begin
        vtot += viol[d];
        checks++;
        if (nref[d] != 1) begin failures++; $display("FAIL: DIMM %0d saw %0d REF", d, nref[d]); end
      end
      checks++;
      if (vtot != 0) begin failures++; $display("FAIL: %0d DRAM timing violations", vtot); end
      $display("events: first=%0d second=%0d late=%0d evict=%0d lf_miss=%0d lf_reuse=%0d inval=%0d mmio=%0d safe=%0d noalloc=%0d",
               n_first, n_second, n_late, n_evict, n_lf_miss, n_lf_reuse, n_inval, n_mmio, n_safe, n_noalloc);
      for (int d = 0; d < N_DIMM; d++) rtot += nref[d];
      checks += 9;
      if (n_first == 0)    begin failures++; $display("FAIL: no first load"); end
      if (n_second == 0)   begin failures++; $display("FAIL: no second load"); end
      if (n_late == 0)     begin failures++; $display("FAIL: no late data"); end
      if (n_evict == 0)    begin failures++; $display("FAIL: no eviction"); end
      if (n_lf_miss == 0)  begin failures++; $display("FAIL: no TL-LF demand miss"); end
      if (n_lf_reuse == 0) begin failures++; $display("FAIL: no TL-LF prefetch reuse"); end
      if (n_inval == 0)    begin failures++; $display("FAIL: no write invalidation"); end
      if (n_mmio == 0)     begin failures++; $display("FAIL: no register access"); end
      if (n_safe == 0)     begin failures++; $display("FAIL: no safe-path read"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
