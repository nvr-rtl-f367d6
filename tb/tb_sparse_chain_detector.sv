// tb_sparse_chain_detector -- self-checking test of the indirect pattern table.
//
// Ports are configured with random IA start addresses and IdxPtr ranges, vector sizes
// are set through the load-event path, and random W vectors are pushed through the
// compute port.  Every lane's address is compared with IA_start + (W[9:0] << vsize)
// computed here, the vectorised length with end - start, the LPI with the highest
// enabled lane's W value, and the second IPT bank is checked to be separate.
module tb_sparse_chain_detector;
  import nvr_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] sp_upd_valid = '0;
  sparse_reg_t [N-1:0] sp_regs = '0;
  logic cfg_bank = 0;
  logic vs_valid = 0;
  logic [4:0] vs_entry = 0;
  logic [3:0] vs_value = 0;
  logic [4:0] c_entry = 0;
  logic [N-1:0][63:0] c_w = '0;
  logic [N-1:0] c_mask = '0;
  logic c_fire = 0;
  addr_t [N-1:0] c_addr;
  logic c_valid;
  logic [9:0] c_len, c_lpi;

  sparse_chain_detector #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint base [32];
  int     len  [32];
  int     vsz  [32];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    c_entry = 4; #1;
    check(!c_valid, "entry invalid after reset");
    // configure both banks
    for (int b = 0; b < 2; b++) begin
      cfg_bank = b[0];
      for (int p = 0; p < N; p++) begin
        int s, e;
        s = $urandom_range(0, 500);
        e = s + $urandom_range(0, 500);
        base[b*N+p] = {$urandom(), $urandom()} & 48'hFFFF_FFFF_FFC0;
        len[b*N+p] = e - s;
        sp_regs[p].ss_start = addr_t'(base[b*N+p]);
        sp_regs[p].idx_start = 10'(s);
        sp_regs[p].idx_end = 10'(e);
      end
      sp_upd_valid = '1;
      @(posedge clk); #1;
      sp_upd_valid = '0;
    end
    for (int e = 0; e < 32; e++) begin
      vsz[e] = $urandom_range(0, 12);
      vs_valid = 1; vs_entry = 5'(e); vs_value = 4'(vsz[e]);
      @(posedge clk); #1;
    end
    vs_valid = 0;
    for (int t = 0; t < 300; t++) begin
      int e, top;
      e = $urandom_range(0, 31);
      top = -1;
      c_entry = 5'(e);
      for (int k = 0; k < N; k++) begin
        c_w[k] = {$urandom(), $urandom()};
        c_mask[k] = $urandom_range(0, 1);
        if (c_mask[k]) top = k;
      end
      #1;
      check(c_valid, "configured entry valid");
      check(c_len == 10'(len[e]), $sformatf("vectorised length entry %0d", e));
      for (int k = 0; k < N; k++)
        check(c_addr[k] == addr_t'(base[e] + (longint'(c_w[k][9:0]) << vsz[e])),
              $sformatf("IA address entry %0d lane %0d", e, k));
      c_fire = 1;
      @(posedge clk); #1;
      c_fire = 0;
      if (top >= 0) check(c_lpi == c_w[top][9:0], $sformatf("LPI entry %0d", e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
