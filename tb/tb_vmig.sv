// tb_vmig -- self-checking test of the vectorisation micro-instruction generator.
//
// The testbench plays the load path (returns W values w = f(address) after a random
// latency) and the sparse chain detector's compute port (IA = 0x100000 + (w << 3),
// so eight consecutive indices share a 64-byte line).  For each micro-instruction it
// checks the W load addresses and mask, and that the vector prefetch carries exactly
// the distinct IA lines of the enabled lanes, each once, in ascending lane order.
// A chain whose IPT entry is invalid must produce no prefetch.  With zero-latency W
// data and no back-pressure, a prefetch leaves 2 cycles after its W data.
module tb_vmig;
  import nvr_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mi_valid = 0, mi_ready;
  micro_inst_t mi = '0;
  logic wl_valid, wl_ready = 1;
  addr_t [N-1:0] wl_addr;
  logic [N-1:0] wl_mask;
  logic vrf_valid = 0, vrf_ready;
  logic [N-1:0][63:0] vrf_data = '0;
  logic [4:0] c_entry;
  logic [N-1:0][63:0] c_w;
  logic [N-1:0] c_mask;
  logic c_fire;
  addr_t [N-1:0] c_addr;
  logic c_valid;
  logic pf_valid, pf_ready = 1;
  addr_t [N-1:0] pf_line;
  logic [N-1:0] pf_mask;
  logic dup_masked, chain_drop;

  vmig #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] wval(addr_t a);
    return 64'((a * 7 + (a >> 5)) % 200);
  endfunction

  // compute-port model: entry 15 is invalid
  always_comb begin
    c_valid = (c_entry != 5'd15);
    for (int k = 0; k < N; k++) c_addr[k] = 48'h100000 + (addr_t'(c_w[k][9:0]) << 3);
  end

  // expected prefetches
  typedef struct { addr_t lines [$]; } exp_t;
  exp_t exp_q [$];
  int latency = 0;
  int n_pf = 0, n_dup = 0;
  int t_vrf, t_pf;

  // load path model: W loads are queued when accepted and answered in order
  typedef struct { addr_t a [N]; logic [N-1:0] m; } wreq_t;
  wreq_t wq [$];
  always @(posedge clk) if (rst_n && wl_valid && wl_ready) begin
    wreq_t r;
    for (int k = 0; k < N; k++) r.a[k] = wl_addr[k];
    r.m = wl_mask;
    wq.push_back(r);
  end
  initial begin
    forever begin
      wreq_t r;
      wait (wq.size() != 0);
      r = wq.pop_front();
      repeat (latency) @(posedge clk);
      #1;
      for (int k = 0; k < N; k++) vrf_data[k] = r.m[k] ? wval(r.a[k]) : 64'hDEAD;
      vrf_valid = 1;
      @(negedge clk);
      while (!vrf_ready) @(negedge clk);
      @(posedge clk);
      t_vrf = $time;
      #1 vrf_valid = 0;
    end
  end

  always @(posedge clk) if (rst_n && pf_valid && pf_ready) begin
    exp_t e;
    int j;
    j = 0;
    t_pf = $time;
    n_pf++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL: unexpected prefetch");
    end else begin
      e = exp_q.pop_front();
      for (int k = 0; k < N; k++)
        if (pf_mask[k]) begin
          checks++;
          if (j >= e.lines.size() || pf_line[k] != e.lines[j]) begin
            failures++; $display("FAIL: prefetch lane %0d line %h npf=%0d s1cnt=%0d mask=%h", k, pf_line[k], n_pf, dut.s1.count, pf_mask);
          end
          j++;
        end
      checks++;
      if (j != e.lines.size()) begin failures++; $display("FAIL: %0d lines, expected %0d", j, e.lines.size()); end
    end
  end
  int n_acc = 0;
  always @(posedge clk) if (dup_masked) n_dup++;
  always @(posedge clk) if (rst_n && mi_valid && mi_ready) n_acc++;

  task automatic send(int port, addr_t base, int stride, int count);
    exp_t e;
    if (port != 15) begin
      for (int k = 0; k < count; k++) begin
        addr_t l = (48'h100000 + (addr_t'(wval(addr_t'(longint'(base) + longint'(stride) * k)) & 10'h3FF) << 3)) >> 6;
        bit seen = 0;
        foreach (e.lines[i]) if (e.lines[i] == l) seen = 1;
        if (!seen) e.lines.push_back(l);
      end
      exp_q.push_back(e);
    end
    @(negedge clk);
    mi_valid = 1; mi.port = 4'(port); mi.w_base = base; mi.stride = 8'(stride); mi.count = 5'(count);
    #1;
    while (!mi_ready) @(negedge clk);
    @(posedge clk);
    #1 mi_valid = 0;
    // check the W load the IRU issues
  endtask

  always @(posedge clk) if (rst_n && wl_valid && wl_ready) begin
    for (int k = 0; k < N; k++) begin
      checks++;
      if (wl_mask[k] != (k < dut.s1.count)) begin failures++; $display("FAIL: wl mask lane %0d", k); end
      if (wl_mask[k] && wl_addr[k] != dut.s1.w_base + addr_t'(signed'(dut.s1.stride) * k)) begin
        failures++; $display("FAIL: wl addr lane %0d", k);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    // zero latency: timing of one operation
    send(0, 48'h4000, 4, 16);
    wait (n_pf == 1);
    #1 check((t_pf - t_vrf) / 10 == 2, $sformatf("prefetch 2 cycles after W data (%0d)", (t_pf - t_vrf) / 10));
    check(n_dup >= 1, "duplicate lines merged");
    // invalid IPT entry: dropped
    send(15, 48'h4000, 4, 16);
    repeat (10) @(posedge clk);
    check(n_pf == 1, "chain without IPT entry dropped");
    // random traffic with latency and back-pressure
    fork
      repeat (600) begin @(posedge clk); #2; pf_ready = $urandom_range(0, 3) != 0; latency = $urandom_range(0, 3); end
      for (int i = 0; i < 60; i++)
        send($urandom_range(0, 14), 48'h8000 + 64 * $urandom_range(0, 1000), $urandom_range(0, 1) ? 4 : -8, $urandom_range(1, 16));
    join
    pf_ready = 1;
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    check(n_pf == 61, $sformatf("all 61 prefetches seen (%0d)", n_pf));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
