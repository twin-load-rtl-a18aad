// tb_bank_state_table: random ACT / PRE / PRE-all traffic against a
// reference array; both read ports are compared every cycle.
//
// How: a 100-time-unit clock; 600 random operations drive act_we/pre_we/
// pre_all with random banks and rows, a reference model of 8 {open,row}
// entries is updated with each, and before the next one every bank is read on
// both ports (port B in reverse order) and compared: one check per bank. A write must be
// visible exactly one cycle later. The entry contents follow the paper; the
// reset state (all closed) is this design's choice. A watchdog ends a hung run.
module tb_bank_state_table;
  import tl_pkg::*;
  logic clk = 0, rst_n = 0;
  logic act_we, pre_we, pre_all;
  logic [2:0] act_bank, pre_bank, a_bank, b_bank;
  logic [LROW_W-1:0] act_row, a_row, b_row;
  logic a_open, b_open;
  int checks = 0, failures = 0;

  bank_state_table u_dut (.*);
  always #50 clk = ~clk;

  bit               ref_open [8];
  logic [LROW_W-1:0] ref_row [8];

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act_we = 0; pre_we = 0; pre_all = 0; act_bank = 0; pre_bank = 0; act_row = 0;
    a_bank = 0; b_bank = 0;
    foreach (ref_open[i]) begin ref_open[i] = 0; ref_row[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      // compare the state visible now
      for (int i = 0; i < 8; i++) begin
        a_bank = 3'(i); b_bank = 3'(7 - i);
        #1;
        checks++;
        if (a_open !== ref_open[i] || (ref_open[i] && a_row !== ref_row[i]) ||
            b_open !== ref_open[7-i] || (ref_open[7-i] && b_row !== ref_row[7-i])) begin
          failures++;
          $display("FAIL op %0d bank %0d: open %0b/%0b row %h/%h", n, i, a_open, ref_open[i], a_row, ref_row[i]);
        end
      end
      // next operation
      act_we  = $urandom_range(0, 1);
      pre_we  = $urandom_range(0, 2) == 0;
      pre_all = $urandom_range(0, 7) == 0;
      act_bank = 3'($urandom); pre_bank = 3'($urandom); act_row = LROW_W'($urandom);
      if (pre_we) begin
        if (pre_all) foreach (ref_open[i]) ref_open[i] = 0;
        else ref_open[pre_bank] = 0;
      end
      if (act_we) begin ref_open[act_bank] = 1; ref_row[act_bank] = act_row; end
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
