// dram_dimm_model: behavioural model of a commodity dual-rank DDR3 DIMM at
// the command/beat level (not synthesizable: associative-array storage).
// Each rank has 8 banks. ACT opens a row, RD returns a 4-beat burst T_RL
// cycles later, WR takes a 4-beat burst T_WL cycles later, PRE closes a bank
// (addr[10]: all banks), REF is counted. Lines never written read as
// tb_pkg::dram_pattern of their address. The model checks the same-bank
// timing of the paper's DDRx table (tRCD, tRP, tRTP) and the open/closed bank
// rules, and counts every violation.
module dram_dimm_model
  import tl_pkg::*;
#(
  parameter int unsigned TREE     = 0,
  parameter int unsigned RID_BASE = 0
) (
  input  logic        clk,
  input  dram_cmd_t   cmd,
  input  beat_t       wdata,
  output beat_t       rdata,
  output int unsigned violations,
  output int unsigned n_ref,
  output int unsigned n_rd,
  output int unsigned n_wr
);
  logic [BEAT_W-1:0] mem [longint];
  bit          open_q [2][8];
  int unsigned row_q  [2][8];
  longint      t_act  [2][8];
  longint      t_pre  [2][8];
  longint      t_rd   [2][8];
  longint      now = 0;

  // pending bursts: start cycle, key of beat 0, read or write
  typedef struct { longint start; longint key; bit rd; int unsigned r, b, row, col; } burst_t;
  burst_t q[$];

  function automatic longint mkkey(int unsigned r, int unsigned b, int unsigned row,
                                   int unsigned col, int unsigned beat);
    return longint'({8'(r), 8'(b), 16'(row), 16'(col), 8'(beat)});
  endfunction

  initial begin
    violations = 0; n_ref = 0; n_rd = 0; n_wr = 0;
    for (int r = 0; r < 2; r++) for (int b = 0; b < 8; b++) begin
      open_q[r][b] = 0; row_q[r][b] = 0;
      t_act[r][b] = -1000; t_pre[r][b] = -1000; t_rd[r][b] = -1000;
    end
  end

  task automatic viol(string what, int r, int b);
    violations++;
    $display("DRAM[%0d/%0d] rank %0d bank %0d: %s at cycle %0d", TREE, RID_BASE, r, b, what, now);
  endtask

  always @(posedge clk) begin
    now++;
    rdata <= '0;
    // command (the first cycles, before the MECs' reset has taken effect, are ignored)
    for (int r = 0; r < 2; r++) if (now > 4 && cmd.cs[r] && cmd.cmd != CMD_NOP) begin
      automatic int b = int'(cmd.bank);
      case (cmd.cmd)
        CMD_ACT: begin
          if (open_q[r][b]) viol("ACT to open bank", r, b);
          if (now - t_pre[r][b] < T_RP) viol("tRP", r, b);
          open_q[r][b] = 1; row_q[r][b] = cmd.addr; t_act[r][b] = now;
        end
        CMD_RD, CMD_WR: begin
          if (!open_q[r][b]) viol("RD/WR to closed bank", r, b);
          if (now - t_act[r][b] < T_RCD) viol("tRCD", r, b);
          if (cmd.cmd == CMD_RD) begin
            t_rd[r][b] = now; n_rd++;
            q.push_back('{now + T_RL, 0, 1, r, b, row_q[r][b], cmd.addr});
          end else begin
            n_wr++;
            q.push_back('{now + T_WL, 0, 0, r, b, row_q[r][b], cmd.addr});
          end
        end
        CMD_PRE: begin
          for (int bb = 0; bb < 8; bb++) if (cmd.addr[A10] || bb == b) begin
            if (open_q[r][bb] && now - t_rd[r][bb] < T_RTP) viol("tRTP", r, bb);
            if (open_q[r][bb]) t_pre[r][bb] = now;
            open_q[r][bb] = 0;
          end
        end
        CMD_REF: if (r == 0) n_ref++;
        default: ;
      endcase
    end
    // data bursts
    foreach (q[i]) begin
      if (now >= q[i].start && now < q[i].start + BURST) begin
        automatic int unsigned beat = int'(now - q[i].start);
        automatic longint k = mkkey(q[i].r, q[i].b, q[i].row, q[i].col, beat);
        if (q[i].rd) begin
          rdata.valid <= 1'b1;
          rdata.data  <= mem.exists(k) ? mem[k] :
                         tb_pkg::dram_pattern(TREE, RID_BASE + q[i].r, q[i].b, q[i].row, q[i].col, beat);
        end else begin
          if (!wdata.valid) begin violations++; $display("DRAM: missing write data at %0d", now); end
          mem[k] = wdata.data;
        end
      end
    end
    while (q.size() > 0 && now >= q[0].start + BURST - 1) void'(q.pop_front());
  end
endmodule
