// tb_routing_table: reset contents of a regular tree (BASE 8, SPAN 4,
// fanout 2: IDs 8..11 -> port 0, 12..15 -> port 1, others unroutable),
// then a configuration write that moves ID 3 onto port 1.
//
// How: a 100-time-unit clock; after reset every one of the 16 IDs is looked up
// and hit/port compared with the regular-tree formula, then one cfg write is
// made and checked from the next cycle on. The table's purpose is the
// paper's; its reset contents and configuration port are this design's.
// A watchdog ends a hung run.
module tb_routing_table;
  import tl_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [RID_W-1:0] id, cfg_id;
  logic hit, cfg_we, cfg_valid;
  logic [0:0] port, cfg_port;
  int checks = 0, failures = 0;

  routing_table #(.FANOUT(2), .BASE(8), .SPAN(4)) u_dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int i, bit eh, int ep);
    id = RID_W'(i); #1;
    checks++;
    if (hit !== eh || (eh && port !== 1'(ep))) begin
      failures++; $display("FAIL id %0d: hit %0b port %0d, expected %0b %0d", i, hit, port, eh, ep);
    end
  endtask

  initial begin
    cfg_we = 0; cfg_id = 0; cfg_valid = 0; cfg_port = 0; id = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 16; i++) chk(i, i >= 8, (i - 8) / 4);
    cfg_we = 1; cfg_id = 3; cfg_valid = 1; cfg_port = 1;
    @(posedge clk); #1;
    cfg_we = 0;
    chk(3, 1, 1);
    chk(2, 0, 0);
    chk(13, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
