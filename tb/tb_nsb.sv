// tb_nsb -- self-checking test of the non-blocking speculative buffer.
//
// An L2 model answers line requests after a random 4..40 cycle latency, out of order,
// with data that is a fixed function of the address.  Random demand loads and
// prefetches over a 64 KiB region (four times the buffer, so lines are evicted) are
// sent; every demand load must be answered exactly once with the right word, and no
// prefetch may be answered.  A directed part checks a hit answered one cycle after
// the request, a miss served from the L2, and coalescing of two loads to one line
// into a single L2 request.  Hits, misses, coalesced requests, dropped prefetches and
// stalls must all occur.
module tb_nsb;
  import nvr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_pf = 0;
  addr_t req_addr = '0;
  logic [4:0] req_id = 0;
  logic resp_valid;
  logic [4:0] resp_id;
  logic [63:0] resp_data;
  logic l2_req_valid, l2_req_ready = 1, l2_resp_valid = 0, l2_resp_ready;
  addr_t l2_req_line;
  logic [2:0] l2_req_tag, l2_resp_tag = 0;
  logic [511:0] l2_resp_data = '0;
  logic ev_hit, ev_miss, ev_coalesce, ev_pf_drop, ev_stall;

  nsb #(.SIZE_BYTES(16384), .WAYS(16), .N_MSHR(8), .N_TGT(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] word_at(addr_t a);
    return {16'h5A5A, a[47:3], 3'b000} ^ 64'h0123_4567_89AB_CDEF;
  endfunction

  // ---------------- L2 model ----------------
  typedef struct { addr_t line; logic [2:0] tag; longint due; } l2_t;
  l2_t l2q [$];
  longint cyc = 0;
  int n_l2_req = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && l2_req_valid && l2_req_ready) begin
      l2_t r;
      r.line = l2_req_line; r.tag = l2_req_tag; r.due = cyc + $urandom_range(4, 40);
      l2q.push_back(r);
      n_l2_req++;
    end
  end
  initial begin
    forever begin
      @(posedge clk); #2;
      l2_req_ready = $urandom_range(0, 4) != 0;
      if (!l2_resp_valid) begin
        for (int i = 0; i < l2q.size(); i++)
          if (l2q[i].due <= cyc) begin
            l2_resp_valid = 1;
            l2_resp_tag = l2q[i].tag;
            for (int w = 0; w < 8; w++)
              l2_resp_data[w*64 +: 64] = word_at({l2q[i].line, 6'd0} + addr_t'(8 * w));
            l2q.delete(i);
            break;
          end
      end
    end
  end
  always @(posedge clk) if (l2_resp_valid && l2_resp_ready) #1 l2_resp_valid = 0;

  // ---------------- scoreboard ----------------
  bit     outstanding [32];
  addr_t  out_addr [32];
  int n_hit = 0, n_miss = 0, n_coal = 0, n_drop = 0, n_stall = 0, n_resp = 0;
  longint last_accept_cyc [32];
  longint resp_cyc [32];
  always @(posedge clk) if (rst_n) begin
    if (ev_hit) n_hit++;
    if (ev_miss) n_miss++;
    if (ev_coalesce) n_coal++;
    if (ev_pf_drop) n_drop++;
    if (ev_stall) n_stall++;
    if (req_valid && req_ready && !req_pf) begin
      outstanding[req_id] = 1; out_addr[req_id] = req_addr; last_accept_cyc[req_id] = cyc;
    end
    if (resp_valid) begin
      n_resp++;
      checks++;
      if (!outstanding[resp_id]) begin failures++; $display("FAIL: response for idle id %0d", resp_id); end
      else if (resp_data != word_at(out_addr[resp_id])) begin
        failures++; $display("FAIL: data id %0d addr %h", resp_id, out_addr[resp_id]);
      end
      outstanding[resp_id] = 0;
      resp_cyc[resp_id] = cyc;
    end
  end

  // send one request; returns when accepted
  task automatic send(addr_t a, bit pf, int id);
    @(negedge clk);
    req_valid = 1; req_addr = a; req_pf = pf; req_id = 5'(id);
    #1;
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    #1 req_valid = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int l2_before;
    for (int i = 0; i < 32; i++) outstanding[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed: miss, then hit one cycle later
    send(48'h10008, 0, 1);
    wait (!outstanding[1]);
    check(n_miss == 1, "first access misses");
    send(48'h10010, 0, 2);
    @(posedge clk); #1;
    check(!outstanding[2] && resp_cyc[2] == last_accept_cyc[2] + 1, "hit answered one cycle after the request");
    // coalescing: two loads to one new line, one L2 request
    l2_before = n_l2_req;
    send(48'h20000, 0, 3);
    send(48'h20038, 0, 4);
    wait (!outstanding[3] && !outstanding[4]);
    check(n_l2_req == l2_before + 1 && n_coal >= 1, "two loads to one line make one L2 request");
    // random traffic
    for (int i = 0; i < 4000; i++) begin
      addr_t a;
      bit pf;
      int id;
      a = 48'h40000 + addr_t'($urandom_range(0, 8191) * 8);
      pf = $urandom_range(0, 2) == 0;
      id = $urandom_range(0, 31);
      if (!pf) while (outstanding[id]) id = (id + 1) % 32;
      if (!pf && outstanding[id]) continue;
      send(a, pf, id);
    end
    repeat (200) @(posedge clk);
    for (int i = 0; i < 32; i++) check(!outstanding[i], $sformatf("id %0d answered", i));
    check(n_hit > 0 && n_miss > 0 && n_coal > 0 && n_drop > 0 && n_stall > 0,
          $sformatf("hit %0d miss %0d coalesce %0d pf-drop %0d stall %0d", n_hit, n_miss, n_coal, n_drop, n_stall));
    $display("hits %0d misses %0d coalesced %0d dropped %0d stalls %0d responses %0d", n_hit, n_miss, n_coal, n_drop, n_stall, n_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
