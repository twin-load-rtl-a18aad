// tb_mec1_safe_path: the safe-path engine waits while the target bank is
// open, then injects ACT, RD and PRE only into free slots, no closer than
// tRCD and tRTP; the returned beats land in the data register and set the
// flag. A second start while busy is ignored.
//
// How: a 100-time-unit clock; the bench holds bank_open and slot_free, records
// the cycle of each injected command and answers the RD with a tagged 4-beat
// burst after T_RL cycles, as the tree would. Checks: command order ACT, RD,
// PRE; RD - ACT >= tRCD (11) and PRE - RD >= tRTP (6), the paper's DDR3
// values; no injection while slot_free is low; data register and flag. The
// register set is the paper's; the injection scheme is this design's.
module tb_mec1_safe_path;
  import tl_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, flag, busy, bank_open, slot_free;
  logic [LADDR_W-1:0] start_addr;
  logic [BEAT_IW-1:0] rd_beat;
  logic [BEAT_W-1:0] rd_data;
  logic [BANK_W-1:0] bank_q_o;
  link_cmd_t inj;
  link_ret_t ret;
  int checks = 0, failures = 0;

  mec1_safe_path u_dut (.*);
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

  int cyc = 0;
  int t_act = -1, t_rd = -1, t_pre = -1, n_inj = 0;
  link_cmd_t c_act, c_rd;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && slot_free && inj.cmd != CMD_NOP) begin
      n_inj++;
      case (inj.cmd)
        CMD_ACT: begin t_act = cyc; c_act = inj; end
        CMD_RD:  begin t_rd = cyc; c_rd = inj; end
        CMD_PRE: t_pre = cyc;
        default: ;
      endcase
      if (bank_open && inj.cmd == CMD_ACT) begin failures++; $display("FAIL: ACT while bank open"); end
    end
  end

  initial begin
    logic [BEAT_W-1:0] line [BURST];
    logic [LADDR_W-1:0] a = {RID_W'(9), PROW_W'('h1357), COL_W'('h1a8), BANK_W'(6)};
    start = 0; start_addr = 0; bank_open = 1; slot_free = 1; rd_beat = 0; ret = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !flag, "idle after reset");
    start = 1; start_addr = a;
    @(negedge clk); start = 0;
    chk(busy && bank_q_o == 3'd6, "busy, asks for bank 6");
    repeat (20) begin @(negedge clk); slot_free = $urandom_range(0, 1); end
    chk(t_act < 0, "no ACT while bank open");
    bank_open = 0;
    start = 1; start_addr = '0;   // ignored while busy
    @(negedge clk); start = 0;
    repeat (60) begin @(negedge clk); slot_free = $urandom_range(0, 2) != 0; end
    slot_free = 1;
    chk(t_act >= 0 && c_act.rid == 9 && c_act.addr == 'h1357 && c_act.bank == 6, "ACT fields");
    chk(t_rd - t_act >= T_RCD && c_rd.addr == 'h1a8 && c_rd.safe, "RD after tRCD with safe marker");
    chk(t_pre - t_rd >= T_RTP, "PRE after tRTP");
    chk(n_inj == 3, "three commands");
    chk(busy && !flag, "waiting for data");
    for (int b = 0; b < BURST; b++) begin
      line[b] = {$urandom, $urandom, $urandom, $urandom};
      ret = '{valid: 1'b1, safe: 1'b1, tag_id: '0, beat: BEAT_IW'(b), data: line[b]};
      @(negedge clk);
    end
    ret = '{valid: 1'b1, safe: 1'b0, tag_id: '0, beat: '0, data: '1};  // not for the safe path
    @(negedge clk); ret = '0;
    @(negedge clk);
    chk(!busy && flag, "flag set, idle");
    for (int b = 0; b < BURST; b++) begin
      rd_beat = BEAT_IW'(b); #1;
      chk(rd_data == line[b], $sformatf("data register beat %0d", b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
