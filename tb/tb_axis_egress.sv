// tb_axis_egress: pushes random results into a 4-deep egress FIFO (never
// into a full one) while the consumer's tready toggles randomly, and checks
// order, data, tlast, the occupancy count, that tvalid is high exactly when
// data is held, and the first-word fall-through timing (a word pushed into
// an empty FIFO is offered the next cycle).
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_axis_egress;
  localparam int D = 4;
  logic clk = 0, rst = 1, push = 0, push_last = 0, m_axis_tready = 0; logic [15:0] push_data = 0;
  logic [2:0] count; logic [15:0] m_axis_tdata; logic m_axis_tvalid, m_axis_tlast;
  axis_egress #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;
  logic [16:0] q[$];
  int checks = 0, failures = 0, npop = 0;
  initial begin : watchdog
    repeat (50000) @(posedge clk); failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); @(negedge clk); rst = 0;
    // fall-through: one word into the empty FIFO
    push = 1; push_data = 16'h1234; push_last = 1; q.push_back({1'b1, 16'h1234});
    @(negedge clk); push = 0;
    checks++; if (!m_axis_tvalid || m_axis_tdata != 16'h1234 || !m_axis_tlast) begin failures++; $display("FAIL fall-through"); end
    for (int t = 0; t < 5000; t++) begin
      logic pop;
      m_axis_tready = ($urandom % 3) != 0;
      if (t > 4900) m_axis_tready = 1;
      pop = m_axis_tvalid && m_axis_tready;
      checks++;
      if (m_axis_tvalid != (q.size() != 0) || int'(count) != q.size()) begin failures++; $display("FAIL valid/count %0d vs %0d", count, q.size()); end
      if (pop) begin
        logic [16:0] e; e = q.pop_front(); npop++;
        checks++; if ({m_axis_tlast, m_axis_tdata} != e) begin failures++; $display("FAIL data %h want %h", {m_axis_tlast, m_axis_tdata}, e); end
      end
      push = (t < 4900) && (($urandom % 2) != 0) && (q.size() < D || pop);
      push_data = 16'($urandom); push_last = ($urandom % 4) == 0;
      if (push) q.push_back({push_last, push_data});
      @(negedge clk);
      push = 0;
    end
    checks++; if (q.size() != 0 || npop < 1000) begin failures++; $display("FAIL drain %0d / pops %0d", q.size(), npop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
