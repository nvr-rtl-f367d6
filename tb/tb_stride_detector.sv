// tb_stride_detector -- self-checking test of the stride detector.
//
// Directed part: a port is trained with a constant 4-byte stream and must become
// confident after the fourth access (1st records, 2nd learns the stride, 3rd and 4th
// raise the confidence to the threshold of 2); the prediction is then last + 4.
// Advancing by 16 elements moves the prediction by 64 bytes; a negative stride is
// learned on another port; a broken pattern lowers the confidence below threshold.
// Random part: random trains and advances on four ports, compared every cycle with a
// reference model of the same table written independently in this testbench,
// including the count of prefetched elements the pointer leads the demand stream.
module tb_stride_detector;
  import nvr_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic train_valid = 0, adv_valid = 0;
  logic [3:0] train_port = 0, adv_port = 0, q_port = 0;
  pc_t train_pc = '0;
  addr_t train_addr = '0;
  logic [4:0] adv_count = 0;
  logic pred_valid;
  addr_t pred_addr;
  logic signed [7:0] pred_stride;
  logic [15:0] pred_ahead;
  pc_t last_pc;

  stride_detector #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference model
  bit     m_valid [N];
  longint m_prev [N], m_last [N];
  int     m_stride [N], m_conf [N], m_ahead [N];

  // train of port p with address a; adv_c > 0 when an advance of the same port
  // happens in the same cycle
  task automatic model_train(int p, longint a, int adv_c);
    longint d;
    int     s0;
    longint l0;
    if (!m_valid[p]) begin
      m_valid[p] = 1; m_prev[p] = a; m_stride[p] = 0; m_conf[p] = 0; m_last[p] = a; m_ahead[p] = 0;
    end else begin
      s0 = m_stride[p]; l0 = m_last[p];
      d = a - m_prev[p];
      if (d >= -128 && d < 128 && d == m_stride[p]) begin
        if (m_conf[p] < 3) m_conf[p]++;
      end else if (m_conf[p] > 0) m_conf[p]--;
      else if (d >= -128 && d < 128) m_stride[p] = int'(d);
      if ((s0 >= 0 && a >= l0) || (s0 < 0 && a <= l0)) begin
        m_last[p] = a; m_ahead[p] = 0;
      end else begin
        m_last[p] = l0 + longint'(s0) * adv_c;
        m_ahead[p] = (m_ahead[p] > 0 ? m_ahead[p] - 1 : 0) + adv_c;
      end
      m_prev[p] = a;
    end
  endtask

  function automatic bit m_pred_valid(int p);
    return m_valid[p] && m_conf[p] >= 2 && m_stride[p] != 0;
  endfunction

  task automatic do_cycle(bit tv, int tp, longint ta, bit av, int ap, int ac);
    train_valid = tv; train_port = 4'(tp); train_addr = addr_t'(ta);
    adv_valid = av; adv_port = 4'(ap); adv_count = 5'(ac);
    @(posedge clk); #1;
    // model: an advance alone, or folded into a train of the same port
    if (av && !(tv && tp == ap)) begin
      m_last[ap] += longint'(m_stride[ap]) * ac;
      m_ahead[ap] += ac;
    end
    if (tv) model_train(tp, ta, (av && tp == ap) ? ac : 0);
    train_valid = 0; adv_valid = 0;
  endtask

  task automatic compare(int p, string tag);
    q_port = 4'(p); #1;
    check(pred_valid == m_pred_valid(p), $sformatf("%s pred_valid port %0d dut=%0d", tag, p, pred_valid));
    if (m_pred_valid(p)) begin
      check(pred_addr == addr_t'(m_last[p] + m_stride[p]), $sformatf("%s pred_addr port %0d %h vs %h", tag, p, pred_addr, m_last[p] + m_stride[p]));
      check(int'(pred_stride) == m_stride[p], $sformatf("%s stride port %0d", tag, p));
      check(int'(pred_ahead) == m_ahead[p], $sformatf("%s ahead port %0d %0d vs %0d", tag, p, pred_ahead, m_ahead[p]));
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < N; p++) begin m_valid[p] = 0; m_prev[p] = 0; m_last[p] = 0; m_stride[p] = 0; m_conf[p] = 0; m_ahead[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    // directed: port 2, stride +4
    for (int i = 0; i < 3; i++) begin
      do_cycle(1, 2, 64'h1000 + 4*i, 0, 0, 0);
      q_port = 2; #1;
      check(!pred_valid, $sformatf("not confident after %0d accesses", i + 1));
    end
    do_cycle(1, 2, 64'h100c, 0, 0, 0);
    q_port = 2; #1;
    check(pred_valid, "confident after 4 accesses");
    check(pred_addr == 48'h1010, $sformatf("prediction 0x1010, got %h", pred_addr));
    check(pred_stride == 8'sd4, "stride 4");
    do_cycle(0, 0, 0, 1, 2, 16);
    q_port = 2; #1;
    check(pred_addr == 48'h1050, $sformatf("after advance 16: 0x1050, got %h", pred_addr));
    // demand stream passing the prefetch pointer pulls it up
    do_cycle(1, 2, 64'h1010, 0, 0, 0);
    q_port = 2; #1;
    check(pred_addr == 48'h1050, "prefetch pointer kept when ahead");
    check(pred_ahead == 15, $sformatf("one of 16 prefetched elements consumed, ahead %0d", pred_ahead));
    // negative stride on port 5
    for (int i = 0; i < 4; i++) do_cycle(1, 5, 64'h2000 - 8*i, 0, 0, 0);
    q_port = 5; #1;
    check(pred_valid && pred_stride == -8'sd8, "negative stride learned");
    check(pred_addr == 48'h2000 - 32, $sformatf("negative prediction, got %h", pred_addr));
    // break the pattern on port 2: confidence 3 -> 2 -> 1
    do_cycle(1, 2, 64'h1017, 0, 0, 0);
    do_cycle(1, 2, 64'h1031, 0, 0, 0);
    q_port = 2; #1;
    check(!pred_valid, "confidence lost after two mismatches");
    check(last_pc == '0, "last pc tracked");
    // random against the model
    for (int i = 0; i < 600; i++) begin
      int p, ap;
      longint a;
      bit tv, av;
      p = $urandom_range(8, 11);
      tv = $urandom_range(0, 3) != 0;
      av = $urandom_range(0, 3) == 0;
      ap = $urandom_range(8, 11);
      case ($urandom_range(0, 5))
        0: a = m_prev[p] + $urandom_range(0, 300);
        default: a = m_prev[p] + 4 * (p - 7);
      endcase
      if (!m_valid[p]) a = 64'h40000 * p;
      do_cycle(tv, p, a, av && m_valid[ap], ap, $urandom_range(1, 16));
      compare(p, "random");
      compare(ap, "random-adv");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
