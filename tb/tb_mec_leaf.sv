// tb_mec_leaf: a leaf MEC for rank IDs 6 and 7 in front of the behavioural
// DIMM model. Checks that commands reach the right rank, that commands for
// other DIMMs are ignored, that write data land and read back, that every
// returned beat carries the tag of its RD (two reads in flight keep their
// order) and that the round trip is 2*T_PD + tRL cycles.
//
// How: a 100-time-unit clock; link commands are driven as MEC1 would send
// them, the DIMM model checks DRAM timing and counts commands, and the bench
// records the cycle of every returned beat. The round-trip check uses
// T_PD = 3 (this design's per-hop delay) and tRL = 11 (the paper's 13.75 ns).
// Tag FIFO depth is this design's choice. A watchdog ends a hung run.
module tb_mec_leaf;
  import tl_pkg::*;
  logic clk = 0, rst_n = 0;
  link_cmd_t up_cmd;
  beat_t     up_wdata, dram_wdata, dram_rdata;
  link_ret_t up_ret;
  dram_cmd_t dram_cmd;
  int unsigned viol, nref, nrd, nwr;
  int checks = 0, failures = 0;

  mec_leaf #(.RID_BASE(6)) u_dut (.*);
  dram_dimm_model #(.TREE(0), .RID_BASE(6)) u_dimm (
    .clk, .cmd(dram_cmd), .wdata(dram_wdata), .rdata(dram_rdata),
    .violations(viol), .n_ref(nref), .n_rd(nrd), .n_wr(nwr));
  always #50 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // returned beats
  typedef struct { int at; link_ret_t r; } got_t;
  got_t got[$];
  always @(posedge clk) if (rst_n && up_ret.valid) got.push_back('{cyc, up_ret});

  task automatic cmd(ddr_cmd_e c, int rid, int bank, int addr, int tag, bit bc = 0);
    link_cmd_t m = '0;
    m.cmd = c; m.rid = RID_W'(rid); m.bank = 3'(bank); m.addr = PROW_W'(addr);
    m.tag_id = 8'(tag); m.bcast = bc;
    up_cmd = m;
    @(negedge clk); up_cmd = '0;
  endtask
  task automatic gap(int n); repeat (n) @(negedge clk); endtask

  initial begin
    logic [BEAT_W-1:0] w [BURST];
    int t_rd;
    up_cmd = '0; up_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    gap(8);
    // foreign DIMM: ignored
    cmd(CMD_ACT, 3, 1, 'h11, 0);
    gap(20);
    chk(nrd == 0 && viol == 0, "foreign command ignored");
    // read rank 7 (rank 1 of this DIMM)
    cmd(CMD_ACT, 7, 2, 'h2468, 0);
    gap(T_RCD - 1);
    t_rd = cyc;
    cmd(CMD_RD, 7, 2, 'h40, 'h5b);
    cmd(CMD_NOP, 0, 0, 0, 0); gap(T_CCD - 2);
    cmd(CMD_RD, 7, 2, 'h48, 'h6c);
    gap(2 * T_PD + T_RL + 12);
    chk(got.size() == 2 * BURST, $sformatf("%0d beats returned", got.size()));
    for (int i = 0; i < got.size() && i < 2 * BURST; i++) begin
      automatic int col = (i < BURST) ? 'h40 : 'h48;
      automatic int tag = (i < BURST) ? 'h5b : 'h6c;
      chk(got[i].r.tag_id == 8'(tag) && got[i].r.beat == 2'(i % BURST) && !got[i].r.safe &&
          got[i].r.data == tb_pkg::dram_pattern(0, 7, 2, 'h2468, col, i % BURST),
          $sformatf("beat %0d tag/data at %0d tag %h beat %0d data %h", i, got[i].at, got[i].r.tag_id, got[i].r.beat, got[i].r.data));
    end
    if (got.size() > 0) begin
      int lat;
      lat = got[0].at - t_rd;
      chk(lat >= 2 * T_PD + T_RL && lat <= 2 * T_PD + T_RL + 2, $sformatf("round trip %0d", lat));
    end
    got.delete();
    // write rank 6 and read back
    cmd(CMD_PRE, 7, 2, 0, 0);
    cmd(CMD_ACT, 6, 5, 'h0f0f, 0);
    gap(T_RCD - 1);
    cmd(CMD_WR, 6, 5, 'h10, 0);
    gap(T_WL - 1);
    for (int b = 0; b < BURST; b++) begin
      w[b] = {$urandom, $urandom, $urandom, $urandom};
      up_wdata = '{valid: 1'b1, data: w[b]};
      @(negedge clk);
    end
    up_wdata = '0;
    gap(10);
    cmd(CMD_RD, 6, 5, 'h10, 'h77, 0);
    gap(2 * T_PD + T_RL + 8);
    chk(got.size() == BURST, "write read-back beats");
    for (int i = 0; i < got.size() && i < BURST; i++)
      chk(got[i].r.data == w[i] && got[i].r.tag_id == 8'h77, $sformatf("read-back beat %0d", i));
    // precharge all and refresh: broadcast to both ranks
    gap(T_RTP);
    cmd(CMD_PRE, 0, 0, 1 << A10, 0, 1);
    gap(T_RP);
    cmd(CMD_REF, 0, 0, 0, 0, 1);
    gap(10);
    chk(nref == 1, "refresh reached the DIMM");
    chk(nwr == 1 && nrd == 3, "DRAM saw 3 reads and 1 write");
    chk(viol == 0, "no DRAM timing violation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
