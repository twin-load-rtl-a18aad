// mec1_safe_path: the slow but safe load path of MEC1.
// When software cannot obtain a line through twin-loads (the line was evicted
// from the LVC before the second load, or the true data equal the fake
// pattern) an exception handler reads it through three uncacheable
// memory-mapped registers, like an I/O port: an address register that
// receives the line address, a flag register that signals completion and a
// data register that holds the line. The paper gives only these three
// registers; how MEC1 performs the read is this design's choice:
//
//  1. A write to the address register (start, line address in
//     {rank_id, row, column, bank} form) clears the flag and arms the engine.
//     A write while a read is in progress is ignored.
//  2. The engine waits until the Bank State Table reports the target logical
//     bank closed, then injects ACT, RD (tRCD later) and PRE (tRTP after the
//     RD) into free command slots of MEC1's master link. The RD carries the
//     safe marker, so its returned beats go to the data register instead of
//     the LVC.
//  3. When the PRE has gone and all four beats have arrived, the flag is set.
//
// Limitation: the memory controller does not know about the injected
// commands. If it activates the same physical bank while the engine holds it
// open, or issues a read whose data would share the return link with the
// injected one, the DRAM timing is violated. Software is expected to keep
// other traffic away from that bank during the (rare) safe read.
//
// Interface: inj is the command to inject this cycle (NOP when none) and is
// taken only when slot_free is high in the same cycle.
module mec1_safe_path
  import tl_pkg::*;
#(
  parameter int unsigned T_RCD_C = T_RCD,
  parameter int unsigned T_RTP_C = T_RTP
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // register writes / reads
  input  logic                 start,
  input  logic [LADDR_W-1:0]   start_addr,
  output logic                 flag,
  output logic                 busy,
  input  logic [BEAT_IW-1:0]   rd_beat,
  output logic [BEAT_W-1:0]    rd_data,
  // bank state of the target bank (BST read port)
  output logic [BANK_W-1:0]    bank_q_o,
  input  logic                 bank_open,
  // injection into the master link
  input  logic                 slot_free,
  output link_cmd_t            inj,
  // returned data
  input  link_ret_t            ret
);
  typedef enum logic [2:0] {S_IDLE, S_WAIT_BANK, S_WAIT_RCD, S_WAIT_RTP, S_WAIT_DATA} state_e;
  state_e state_q;

  logic [LADDR_W-1:0] addr_q;
  logic [7:0]         cnt_q;
  logic [BEAT_IW:0]   got_q;
  logic               flag_q;
  logic [BEAT_W-1:0]  data_q [BURST];

  wire [RID_W-1:0]  a_rid  = addr_q[LADDR_W-1 -: RID_W];
  wire [PROW_W-1:0] a_row  = addr_q[COL_W+BANK_W +: PROW_W];
  wire [COL_W-1:0]  a_col  = addr_q[BANK_W +: COL_W];
  wire [BANK_W-1:0] a_bank = addr_q[BANK_W-1:0];

  assign bank_q_o = a_bank;

  // command to inject this cycle
  always_comb begin
    inj = '0;
    inj.cmd  = CMD_NOP;
    inj.rid  = a_rid;
    inj.bank = a_bank;
    inj.safe = 1'b1;
    unique case (state_q)
      S_WAIT_BANK: if (!bank_open) begin
        inj.cmd  = CMD_ACT;
        inj.addr = a_row;
      end
      S_WAIT_RCD: if (cnt_q == 0) begin
        inj.cmd  = CMD_RD;
        inj.addr = PROW_W'(a_col);
      end
      S_WAIT_RTP: if (cnt_q == 0) begin
        inj.cmd  = CMD_PRE;
      end
      default: ;
    endcase
  end

  wire taken = slot_free && inj.cmd != CMD_NOP;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      addr_q  <= '0;
      cnt_q   <= '0;
      got_q   <= '0;
      flag_q  <= 1'b0;
    end else begin
      if (cnt_q != 0) cnt_q <= cnt_q - 1'b1;
      if (ret.valid && ret.safe && state_q != S_IDLE) got_q <= got_q + 1'b1;
      unique case (state_q)
        S_IDLE: if (start) begin
          addr_q  <= start_addr;
          flag_q  <= 1'b0;
          got_q   <= '0;
          state_q <= S_WAIT_BANK;
        end
        S_WAIT_BANK: if (taken) begin
          cnt_q   <= 8'(T_RCD_C - 1);
          state_q <= S_WAIT_RCD;
        end
        S_WAIT_RCD: if (taken) begin
          cnt_q   <= 8'(T_RTP_C - 1);
          state_q <= S_WAIT_RTP;
        end
        S_WAIT_RTP: if (taken) state_q <= S_WAIT_DATA;
        S_WAIT_DATA: if (got_q == (BEAT_IW+1)'(BURST)) begin
          flag_q  <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (ret.valid && ret.safe) data_q[ret.beat] <= ret.data;
  end

  assign flag    = flag_q;
  assign busy    = state_q != S_IDLE;
  assign rd_data = data_q[rd_beat];
endmodule
