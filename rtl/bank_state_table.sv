// bank_state_table: the Bank State Table (BST) of MEC1.
// One entry per logical bank, as in the paper: an open/closed flag and the
// row address of the last ACT. MEC1 needs it because a DDRx RD or WR carries
// only bank and column; the row, and with it the target rank ID in the row's
// high bits, must be recovered from the earlier ACT to that bank.
//
// Interface: an ACT writes {open, row} for act_bank; a PRE closes pre_bank,
// or all banks when pre_all is set. Two combinational read ports: port A
// serves the command being decoded, port B the safe-path engine. A write is
// visible from the next cycle. Reset closes every bank (the paper does not
// describe reset; this is this design's choice).
module bank_state_table #(
  parameter int unsigned N_BANKS = 8,
  parameter int unsigned ROW_W   = tl_pkg::LROW_W,
  localparam int unsigned BI_W   = $clog2(N_BANKS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // updates
  input  logic             act_we,
  input  logic [BI_W-1:0]  act_bank,
  input  logic [ROW_W-1:0] act_row,
  input  logic             pre_we,
  input  logic             pre_all,
  input  logic [BI_W-1:0]  pre_bank,
  // read port A
  input  logic [BI_W-1:0]  a_bank,
  output logic             a_open,
  output logic [ROW_W-1:0] a_row,
  // read port B
  input  logic [BI_W-1:0]  b_bank,
  output logic             b_open,
  output logic [ROW_W-1:0] b_row
);
  logic             open_q [N_BANKS];
  logic [ROW_W-1:0] row_q  [N_BANKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_BANKS; i++) begin
        open_q[i] <= 1'b0;
        row_q[i]  <= '0;
      end
    end else begin
      if (pre_we) begin
        if (pre_all) for (int i = 0; i < N_BANKS; i++) open_q[i] <= 1'b0;
        else         open_q[pre_bank] <= 1'b0;
      end
      if (act_we) begin
        open_q[act_bank] <= 1'b1;
        row_q[act_bank]  <= act_row;
      end
    end
  end

  assign a_open = open_q[a_bank];
  assign a_row  = row_q[a_bank];
  assign b_open = open_q[b_bank];
  assign b_row  = row_q[b_bank];
endmodule
