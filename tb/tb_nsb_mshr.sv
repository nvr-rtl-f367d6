// tb_nsb_mshr -- self-checking test of the MSHR file.
//
// Allocates a line with a first target, coalesces three more targets into it until
// the target list is full, allocates a prefetch-only line, checks that entries are
// offered to the L2 oldest-index first and only once, that a fill presents the line
// and all its targets and frees the entry, and that the file reports full after eight
// allocations and accepts a new line once one is filled.
module tb_nsb_mshr;
  import nvr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  addr_t lk_line = '0;
  logic lk_hit, lk_tgt_full, full;
  logic [2:0] lk_idx, alloc_idx, add_idx = 0, iss_tag, fill_tag = 0;
  logic alloc_valid = 0, alloc_tgt = 0, add_valid = 0, iss_ready = 0, fill_valid = 0, iss_valid;
  addr_t alloc_line = '0, iss_line, fill_line;
  logic [4:0] alloc_id = 0, add_id = 0;
  logic [2:0] alloc_off = 0, add_off = 0;
  logic [3:0] fill_tgt_valid;
  logic [3:0][4:0] fill_tgt_id;
  logic [3:0][2:0] fill_tgt_off;
  logic [3:0] occupancy;

  nsb_mshr #(.N_MSHR(8), .N_TGT(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic tick();
    @(posedge clk); #1;
    alloc_valid = 0; add_valid = 0; iss_ready = 0; fill_valid = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    lk_line = 48'h100; #1;
    check(!lk_hit && !full && !iss_valid && occupancy == 0, "empty after reset");
    alloc_valid = 1; alloc_line = 48'h100; alloc_tgt = 1; alloc_id = 5'd3; alloc_off = 3'd2;
    check(alloc_idx == 0, "lowest free entry");
    tick();
    check(lk_hit && lk_idx == 0 && !lk_tgt_full, "line 0x100 outstanding");
    for (int t = 0; t < 3; t++) begin
      add_valid = 1; add_idx = lk_idx; add_id = 5'(10 + t); add_off = 3'(t);
      tick();
    end
    check(lk_tgt_full, "target list full after four targets");
    alloc_valid = 1; alloc_line = 48'h200; alloc_tgt = 0;
    check(alloc_idx == 1, "second entry");
    tick();
    check(occupancy == 2, "two entries");
    check(iss_valid && iss_line == 48'h100 && iss_tag == 0, "oldest entry issued first");
    iss_ready = 1; tick();
    check(iss_valid && iss_line == 48'h200 && iss_tag == 1, "then the second");
    iss_ready = 1; tick();
    check(!iss_valid, "nothing left to issue");
    fill_tag = 0; #1;
    check(fill_line == 48'h100 && fill_tgt_valid == 4'hF, "fill shows line and four targets");
    check(fill_tgt_id[0] == 3 && fill_tgt_off[0] == 2 && fill_tgt_id[3] == 12 && fill_tgt_off[3] == 2, "target payloads");
    fill_valid = 1; tick();
    lk_line = 48'h100; #1;
    check(!lk_hit && occupancy == 1, "entry freed by the fill");
    fill_tag = 1; #1;
    check(fill_tgt_valid == 0, "prefetch entry has no targets");
    // fill the file
    for (int e = 0; e < 7; e++) begin
      alloc_valid = 1; alloc_line = addr_t'(48'h1000 + e); alloc_tgt = 1; alloc_id = 5'(e);
      tick();
    end
    check(full && occupancy == 8, "full after eight entries");
    lk_line = 48'h1003; #1;
    check(lk_hit && lk_idx == 4, "associative lookup finds line 0x1003 in entry 4");
    fill_tag = 1; fill_valid = 1; tick();
    check(!full, "space after a fill");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
