// tb_nvr_controller -- self-checking test of the runahead controller.
//
// The stride detector and loop bound detector are stood in for by the testbench: the
// prediction advances by count * stride whenever the controller reports an advance.
// Checked: a load event without a confident prediction is skipped; with one, the
// controller raises runahead_req, waits while the sparse unit is busy, then lowers a
// loop with 41 elements left (the one being loaded plus 40) into micro-instructions of 16, 16 and 8 elements with base
// addresses 0x1000, 0x1040, 0x1080 on consecutive cycles (one per cycle), the last
// one flagged as a bound clip, and drops back to idle.  With random VMIG back-pressure
// a 45-element run still yields exactly 45 elements.  When the stride detector's
// pointer already leads by `ahead` elements only the rest is prefetched, and nothing
// if the loop is fully covered.  A sparse unit that turns busy
// in the middle of a run aborts it.
module tb_nvr_controller;
  import nvr_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_evt_valid = 0;
  load_evt_t ld_evt = '0;
  logic sparse_idle = 0;
  logic runahead_req;
  logic [3:0] q_port;
  logic sd_pred_valid = 0;
  addr_t sd_pred_addr = '0;
  logic signed [7:0] sd_pred_stride = 8'sd4;
  logic sd_adv_valid;
  logic [4:0] sd_adv_count;
  logic [15:0] lbd_remaining = 0;
  logic [15:0] sd_pred_ahead = 0;
  logic mi_valid, mi_ready = 1;
  micro_inst_t mi;
  logic in_runahead, ev_enter, ev_wait_idle, ev_abort, ev_clip, ev_skip;

  nvr_controller #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stride detector stand-in
  always @(posedge clk) if (sd_adv_valid) sd_pred_addr <= sd_pred_addr + sd_pred_stride * sd_adv_count;

  int n_mi, n_elems, n_clip, n_wait, n_skip, n_abort, n_enter;
  addr_t bases [$];
  int counts [$];
  always @(posedge clk) begin
    if (mi_valid && mi_ready) begin
      n_mi++; n_elems += mi.count; bases.push_back(mi.w_base); counts.push_back(mi.count);
    end
    if (ev_clip) n_clip++;
    if (ev_wait_idle) n_wait++;
    if (ev_skip) n_skip++;
    if (ev_abort) n_abort++;
    if (ev_enter) n_enter++;
  end

  task automatic load_event(int port);
    ld_evt_valid = 1; ld_evt.port = 4'(port);
    @(posedge clk); #1; ld_evt_valid = 0;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    lbd_remaining = 41;   // the element being loaded plus 40 to prefetch
    load_event(2);
    check(n_skip == 1 && !runahead_req, "no confident prediction: skipped");
    sd_pred_valid = 1; sd_pred_addr = 48'h1000;
    load_event(2);
    check(runahead_req && n_enter == 1, "runahead requested");
    repeat (5) @(posedge clk); #1;
    check(n_wait >= 5 && n_mi == 0, "waits while the sparse unit is busy");
    check(q_port == 2, "run follows the event's port");
    sparse_idle = 1;
    @(posedge clk); #1;           // RA_REQ -> RUN
    t0 = $time;
    wait (!runahead_req);
    t1 = $time;
    #1;
    check(n_mi == 3 && n_elems == 40, $sformatf("40 elements in 3 micro-instructions (%0d, %0d)", n_mi, n_elems));
    check(bases.size() == 3 && bases[0] == 48'h1000 && bases[1] == 48'h1040 && bases[2] == 48'h1080, "base addresses");
    check(counts[0] == 16 && counts[1] == 16 && counts[2] == 8, "counts 16,16,8");
    check(n_clip == 1, "last micro-instruction clipped by the bound");
    check((t1 - t0 + 1) / 10 == 3, $sformatf("one micro-instruction per cycle (%0d cycles)", (t1 - t0 + 1) / 10));
    // random back-pressure
    n_mi = 0; n_elems = 0;
    lbd_remaining = 46;
    fork
      begin
        load_event(4);
        repeat (2) @(posedge clk);
        wait (!runahead_req);
      end
      begin
        repeat (200) begin @(negedge clk); mi_ready = $urandom_range(0, 2) != 0; end
      end
    join_any
    mi_ready = 1;
    #1 check(n_elems == 45 && n_mi == 3, $sformatf("45 elements under back-pressure (%0d in %0d)", n_elems, n_mi));
    // the prefetch pointer already covers the rest of the loop: nothing to do
    n_mi = 0; n_skip = 0;
    lbd_remaining = 20; sd_pred_ahead = 19;
    load_event(3);
    check(n_skip == 1 && !runahead_req, "loop already covered by the prefetch pointer: skipped");
    lbd_remaining = 20; sd_pred_ahead = 15;
    load_event(3);
    wait (!runahead_req); #1;
    check(n_elems == 45 + 4 && n_mi == 1, $sformatf("only the 4 uncovered elements prefetched (%0d)", n_elems - 45));
    sd_pred_ahead = 0;
    // abort
    n_mi = 0; lbd_remaining = 1000;
    load_event(1);
    repeat (4) @(posedge clk); #1;
    check(in_runahead && n_mi >= 2, "long run in progress");
    sparse_idle = 0;
    @(posedge clk); #1;
    check(!runahead_req && n_abort == 1, "busy sparse unit aborts the run");
    check(!mi_valid, "no micro-instruction after abort");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
