// tb_load_value_cache: directed test of the 16-entry LVC: allocation of 16
// lines, lookup, LRU eviction by the 17th, filling and reading a line, a stale
// fill (old generation) being dropped, a consumed entry not being reallocated
// while it drains, invalidation by a write, and reuse of free entries.
//
// How: a 100-time-unit clock; each step drives one operation, waits for the
// clock edge and compares the outputs with the expected entry, tag ID,
// eviction flag or data. LRU replacement and the tag/valid/data fields are
// the paper's; generations, draining and invalidation are this design's
// choices and are tested as specified in the module. Runs with M = 16, the
// module default. A watchdog ends a hung run.
module tb_load_value_cache;
  import tl_pkg::*;
  localparam int M = 16;
  logic clk = 0, rst_n = 0;
  logic [LADDR_W-1:0] lk_tag, alloc_tag, inv_tag;
  logic lk_hit, alloc_en, alloc_ok, alloc_evict, cons_en, rel_en, inv_en, inv_hit, fill_en, rd_ready;
  logic [3:0] lk_idx, alloc_idx, cons_idx, rel_idx, rd_idx, rdy_idx;
  logic [TAG_ID_W-1:0] alloc_tag_id, fill_tag_id;
  logic [BEAT_IW-1:0] fill_beat, rd_beat;
  logic [BEAT_W-1:0] fill_data, rd_data;
  int checks = 0, failures = 0;

  load_value_cache #(.M(M)) u_dut (.*);
  always #50 clk = ~clk;

  initial begin
    repeat (400) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [LADDR_W-1:0] tg(int i);
    return LADDR_W'(32'h1000 + 37 * i);
  endfunction
  task automatic idle();
    alloc_en = 0; cons_en = 0; rel_en = 0; inv_en = 0; fill_en = 0;
  endtask
  task automatic step();   // apply the current inputs at the next edge
    @(posedge clk); #1; idle(); #1;
  endtask
  task automatic look(int i, output bit h, output int idx);
    lk_tag = tg(i); #1; h = lk_hit; idx = int'(lk_idx);
  endtask

  int idx_of [20];
  logic [TAG_ID_W-1:0] id_of [20];

  initial begin
    bit h; int x;
    logic [BEAT_W-1:0] line [BURST];
    idle(); lk_tag = 0; alloc_tag = 0; inv_tag = 0; cons_idx = 0; rel_idx = 0;
    fill_tag_id = 0; fill_beat = 0; fill_data = 0; rd_idx = 0; rd_beat = 0; rdy_idx = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;

    look(0, h, x); chk(!h, "empty LVC hits");
    // 16 allocations fill the cache without eviction
    for (int i = 0; i < M; i++) begin
      alloc_en = 1; alloc_tag = tg(i); #1;
      chk(alloc_ok && !alloc_evict, $sformatf("alloc %0d ok, no eviction", i));
      idx_of[i] = int'(alloc_idx); id_of[i] = alloc_tag_id;
      step();
    end
    for (int i = 0; i < M; i++) begin
      look(i, h, x); chk(h && x == idx_of[i], $sformatf("lookup %0d", i));
      for (int j = 0; j < i; j++) chk(idx_of[j] != idx_of[i], "distinct entries");
    end
    // 17th: evicts the least recently allocated (line 0)
    alloc_en = 1; alloc_tag = tg(16); #1;
    chk(alloc_ok && alloc_evict && int'(alloc_idx) == idx_of[0], "LRU victim is line 0");
    idx_of[16] = int'(alloc_idx); id_of[16] = alloc_tag_id;
    chk(id_of[16] != id_of[0], "new generation");
    step();
    look(0, h, x); chk(!h, "line 0 evicted");
    look(16, h, x); chk(h && x == idx_of[16], "line 16 present");
    // stale fill (old generation of the same entry) is dropped
    fill_en = 1; fill_tag_id = id_of[0]; fill_beat = 0; fill_data = '1; step();
    rdy_idx = 4'(idx_of[16]); #1; chk(!rd_ready, "stale fill dropped");
    // proper fill
    for (int b = 0; b < BURST; b++) begin
      line[b] = {$urandom, $urandom, $urandom, $urandom};
      fill_en = 1; fill_tag_id = id_of[16]; fill_beat = BEAT_IW'(b); fill_data = line[b]; step();
      if (b == 0) chk(rd_ready, "ready after beat 0");
    end
    for (int b = 0; b < BURST; b++) begin
      rd_idx = 4'(idx_of[16]); rd_beat = BEAT_IW'(b); #1;
      chk(rd_data == line[b], $sformatf("read beat %0d", b));
    end
    // consume line 16: gone from lookup, not reallocated while draining
    cons_en = 1; cons_idx = 4'(idx_of[16]); step();
    look(16, h, x); chk(!h, "consumed entry no longer hits");
    alloc_en = 1; alloc_tag = tg(17); #1;
    chk(alloc_ok && int'(alloc_idx) == idx_of[1] && alloc_evict, "draining entry skipped, LRU line 1 evicted");
    step();
    // release, invalidate line 2, then allocations take the free entries
    rel_en = 1; rel_idx = 4'(idx_of[16]); step();
    inv_en = 1; inv_tag = tg(2); #1; chk(inv_hit, "write hits line 2"); step();
    look(2, h, x); chk(!h, "line 2 invalidated");
    alloc_en = 1; alloc_tag = tg(18); #1;
    chk(alloc_ok && !alloc_evict &&
        int'(alloc_idx) == ((idx_of[16] < idx_of[2]) ? idx_of[16] : idx_of[2]), "free entry reused");
    step();
    look(3, h, x); chk(h && x == idx_of[3], "line 3 untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
