// tb_polaron_top: end-to-end testbench of the POLARON engine at its default
// size (64 PARV-CEs, 256-word banks).
//
// Acting as host and DMA it writes a seven-layer workload over AXI-Lite,
// streams activation and weight vectors in over AXI-Stream, starts the run
// and collects the outputs on the output stream with a randomly throttled
// tready. Every output is compared with a reference computed here in real
// arithmetic: exact for fixed-point layers, within a tolerance for float,
// BF16 and posit layers. Layers differ in precision mode (mode switches),
// one is skipped (early exit), one has a zero activation vector (zero-skip),
// one saturates (overflow flags), one uses SoftMax (two-pass AF), and the
// throttled output causes issue stalls. Each of these mechanisms is counted
// from the status registers and must have happened at least once.
// The expected behaviour checked here is this design's own specification of
// the block (the published description gives no test vectors).
module tb_polaron_top;
  import polaron_pkg::*;
  import tb_fmt_pkg::*;

  localparam int NUM_CE = 64;     // defaults of polaron_top
  localparam int NL     = 7;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [11:0]  awaddr = 0, araddr = 0;
  logic         awvalid = 0, wvalid = 0, bready = 1, arvalid = 0, rready = 1;
  logic [31:0]  wdata = 0;
  logic         awready, wready, bvalid, arready, rvalid;
  logic [1:0]   bresp, rresp;
  logic [31:0]  rdata;
  logic [127:0] s_tdata = 0;
  logic         s_tvalid = 0, s_tlast = 0, s_tready;
  logic [15:0]  m_tdata;
  logic         m_tvalid, m_tlast, m_tready = 1, irq;

  polaron_top dut (
    .clk, .rst,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(4'hf), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tlast(s_tlast),
    .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tlast(m_tlast),
    .m_axis_tready(m_tready), .irq);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ------------------------------------------------------------ AXI-Lite
  task automatic axil_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
  endtask
  task automatic axil_read(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
  endtask

  // ------------------------------------------------------------ workload
  typedef struct {
    mode_e m; bit v; af_e af; bit skip; int k; int os; int scale; int pps; int bias;
    int act_base; int wgt_base; bit zero_vec;
  } layer_t;
  layer_t L [NL];
  logic [127:0] actv [NL][4];
  logic [127:0] wgtv [NL][NUM_CE][4];

  function automatic int nl(mode_e m);
    case (m) MODE_FXP4, MODE_FP8: return 16; MODE_FXP8, MODE_POSIT8, MODE_BF16: return 4; default: return 1; endcase
  endfunction
  function automatic int eb(mode_e m);
    case (m) MODE_FXP4: return 4; MODE_FP8, MODE_FXP8, MODE_POSIT8: return 8; default: return 16; endcase
  endfunction
  function automatic real ev(mode_e m, bit v, logic [15:0] x);
    case (m)
      MODE_FXP4: return r_fxp(x, 4);   MODE_FXP8: return r_fxp(x, 8);
      MODE_FXP16: return r_fxp(x, 16);
      MODE_FP8:  return v ? r_fp(x, 5, 2, 15) : r_fp(x, 4, 3, 7);
      MODE_BF16: return r_fp(x, 8, 7, 127);
      MODE_FP16: return v ? r_fp(x, 6, 9, 31) : r_fp(x, 5, 10, 15);
      MODE_POSIT8: return r_posit(x, 8, 0);
      default:   return r_posit(x, 16, 1);
    endcase
  endfunction
  // small random element: |value| roughly 0.1 .. 1
  function automatic logic [15:0] rel(mode_e m, bit v);
    logic [15:0] x;
    x = 16'($urandom);
    case (m)
      MODE_FXP4:  x = x & 16'h000f;
      MODE_FXP8:  x = x & 16'h00ff;
      MODE_FXP16: x = x & 16'hffff;
      MODE_FP8:   begin x = x & 16'h00ff; if (!v) x[6:3] = 4'(4 + $urandom_range(0, 2)); end
      MODE_BF16:  x[14:7] = 8'(123 + $urandom_range(0, 3));
      MODE_FP16:  x[14:10] = 5'(11 + $urandom_range(0, 3));
      MODE_POSIT8: begin x = x & 16'h00ff; x[6:5] = 2'b01; end
      default: ;
    endcase
    return x;
  endfunction

  function automatic real sigm(real x); return 1.0 / (1.0 + $exp(-x)); endfunction
  function automatic real af_ref(af_e f, real x, real smsum);
    case (f)
      AF_RELU:    return (x > 0.0) ? x : 0.0;
      AF_SIGMOID: return sigm(x);
      AF_TANH:    return 2.0 * sigm(2.0 * x) - 1.0;
      AF_SWISH:   return x * sigm(x);
      AF_GELU:    return 0.5 * x * (1.0 + (2.0 * sigm(2.0 * 0.7978845608 * (x + 0.044715 * x * x * x)) - 1.0));
      AF_SELU:    return (x > 0.0) ? 1.0507 * x : 1.0507 * 1.67326 * ($exp(x) - 1.0);
      AF_SOFTMAX: return $exp(x) / smsum;
      default:    return x;
    endcase
  endfunction

  real    exp_r [NL][NUM_CE];
  int     exp_i [NL][NUM_CE];
  bit     exact [NL];

  task automatic build();
    int a, w;
    a = 0; w = 0;
    //      mode          v  af          skip k os scale pps bias
    L[0] = '{MODE_FXP8,   0, AF_RELU,    0,   3, 0, 64,   0,  0,   0, 0, 0};
    L[1] = '{MODE_FP16,   0, AF_SIGMOID, 0,   2, 0, 256,  0,  0,   0, 0, 0};
    L[2] = '{MODE_FXP16,  0, AF_NONE,    1,   1, 0, 256,  0,  0,   0, 0, 0};
    L[3] = '{MODE_BF16,   0, AF_TANH,    0,   2, 0, 256,  0,  0,   0, 0, 0};
    L[4] = '{MODE_FXP4,   0, AF_NONE,    0,   3, 0, 32767, 0, 0,   0, 0, 1};
    L[5] = '{MODE_POSIT8, 0, AF_SOFTMAX, 0,   2, 0, 64,   0,  0,   0, 0, 0};
    L[6] = '{MODE_FP8,    0, AF_GELU,    0,   2, 0, 256,  1,  32,  0, 0, 0};
    for (int l = 0; l < NL; l++) begin
      L[l].act_base = a; L[l].wgt_base = w;
      a += L[l].k; w += L[l].k;
      for (int k = 0; k < L[l].k; k++) begin
        actv[l][k] = '0;
        for (int e = 0; e < nl(L[l].m); e++) actv[l][k][e*eb(L[l].m) +: 16] = rel(L[l].m, L[l].v);
        actv[l][k] &= (128'(1) << (nl(L[l].m) * eb(L[l].m))) - 1;
        if (L[l].zero_vec && k == 1) actv[l][k] = '0;
        for (int c = 0; c < NUM_CE; c++) begin
          wgtv[l][c][k] = '0;
          for (int e = 0; e < nl(L[l].m); e++) wgtv[l][c][k][e*eb(L[l].m) +: 16] = rel(L[l].m, L[l].v);
          wgtv[l][c][k] &= (128'(1) << (nl(L[l].m) * eb(L[l].m))) - 1;
        end
      end
    end
    // reference outputs
    for (int l = 0; l < NL; l++) begin
      real smsum;
      exact[l] = (L[l].m == MODE_FXP4 || L[l].m == MODE_FXP8 || L[l].m == MODE_FXP16) &&
                 (L[l].af == AF_NONE || L[l].af == AF_RELU);
      smsum = 0.0;
      for (int c = 0; c < NUM_CE; c++) begin
        real d, x;
        longint di, ce, r;
        d = 0.0;
        for (int k = 0; k < L[l].k; k++)
          for (int e = 0; e < nl(L[l].m); e++)
            d += ev(L[l].m, L[l].v, 16'(actv[l][k] >> (e*eb(L[l].m)))) *
                 ev(L[l].m, L[l].v, 16'(wgtv[l][c][k] >> (e*eb(L[l].m))));
        if (exact[l]) begin
          di = longint'(d);
          ce = (di >= 0) ? (di + (1 << L[l].os) - 1) >>> L[l].os : -((-di) >>> L[l].os);
          if (ce > 32767) ce = 32767;
          if (ce < -32768) ce = -32768;
          r = ce * L[l].scale;
          r = (r >>> (8 + L[l].pps)) + L[l].bias;
          if (r > 32767) r = 32767;
          if (r < -32768) r = -32768;
          if (L[l].af == AF_RELU && r < 0) r = 0;
          exp_i[l][c] = int'(r);
        end else begin
          x = d * real'(L[l].scale) / 256.0 / r_pow2(L[l].pps) + real'(L[l].bias) / 256.0;
          exp_r[l][c] = x;
          smsum += $exp(x);
        end
      end
      if (!exact[l])
        for (int c = 0; c < NUM_CE; c++) exp_r[l][c] = af_ref(L[l].af, exp_r[l][c], smsum);
    end
  endtask

  task automatic write_desc(int l);
    logic [31:0] w0, w1, w2, w3;
    w0 = {24'd0, L[l].skip, 3'(L[l].af), L[l].v, 3'(L[l].m)};
    w1 = {8'(L[l].act_base), 5'(L[l].os), 19'd0};
    w2 = {8'd0, 4'(L[l].pps), 4'd0, 8'(L[l].k), 8'(L[l].wgt_base)};
    w3 = {16'(L[l].bias), 16'(L[l].scale)};
    axil_write(12'h100 + 12'(16 * l) + 0, w0);
    axil_write(12'h100 + 12'(16 * l) + 4, w1);
    axil_write(12'h100 + 12'(16 * l) + 8, w2);
    axil_write(12'h100 + 12'(16 * l) + 12, w3);
  endtask

  task automatic stream(input int bank, input int addr, input logic [127:0] v [$]);
    axil_write(12'h00C, {16'd0, 8'(bank), 8'(addr)});
    for (int i = 0; i < v.size(); i++) begin
      @(negedge clk);
      s_tdata = v[i]; s_tvalid = 1; s_tlast = (i == v.size() - 1);
      do @(posedge clk); while (!s_tready);
      @(negedge clk);
      s_tvalid = 0; s_tlast = 0;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
  endtask

  // ------------------------------------------------------------ output side
  int got_cnt [NL];
  int out_layer = 0, out_idx = 0, lasts = 0;
  int active [$];
  always @(posedge clk) begin
    if (!rst && m_tvalid && m_tready) begin
      int l;
      l = active[out_layer];
      if (exact[l]) begin
        check($signed(m_tdata) == exp_i[l][out_idx],
              $sformatf("layer %0d ce %0d got %0d want %0d", l, out_idx, $signed(m_tdata), exp_i[l][out_idx]));
      end else begin
        real g, tol;
        g = real'($signed(m_tdata)) / 256.0;
        tol = 0.04 + 0.03 * r_abs(exp_r[l][out_idx]);
        check(r_abs(g - exp_r[l][out_idx]) <= tol,
              $sformatf("layer %0d ce %0d got %f want %f", l, out_idx, g, exp_r[l][out_idx]));
      end
      check(m_tlast == (out_idx == NUM_CE - 1), $sformatf("tlast at layer %0d idx %0d", l, out_idx));
      got_cnt[l]++;
      if (m_tlast) lasts++;
      out_idx++;
      if (out_idx == NUM_CE) begin out_idx = 0; out_layer++; end
    end
  end
  always @(negedge clk) m_tready = ($urandom_range(0, 2) != 0);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] st, ovf, zs, sk, hits, stalls, msw, cyc, nout;
    logic [127:0] q [$];
    int t_irq;
    build();
    for (int l = 0; l < NL; l++) if (!L[l].skip) active.push_back(l);
    repeat (4) @(posedge clk);
    rst = 0;
    for (int l = 0; l < NL; l++) write_desc(l);
    axil_write(12'h008, NL);
    // activations
    for (int l = 0; l < NL; l++) begin
      q.delete();
      for (int k = 0; k < L[l].k; k++) q.push_back(actv[l][k]);
      stream(0, L[l].act_base, q);
    end
    // weights, bank c+1 for CE c
    for (int c = 0; c < NUM_CE; c++) begin
      q.delete();
      for (int l = 0; l < NL; l++) for (int k = 0; k < L[l].k; k++) q.push_back(wgtv[l][c][k]);
      stream(c + 1, 0, q);
    end
    axil_write(12'h000, 1);
    // stream input is held off while the engine runs
    repeat (3) @(posedge clk);
    check(!s_tready, "loader ready while busy");
    t_irq = 0;
    while (!irq) begin @(posedge clk); t_irq++; end
    repeat (40) @(posedge clk);
    axil_read(12'h004, st);
    axil_read(12'h010, ovf);
    axil_read(12'h014, zs);
    axil_read(12'h01C, sk);
    axil_read(12'h020, hits);
    axil_read(12'h02C, stalls);
    axil_read(12'h030, msw);
    axil_read(12'h028, cyc);
    axil_read(12'h018, nout);
    $display("run: %0d cycles, outputs %0d, overflows %0d, zero-skips %0d, skipped layers %0d, prefetch hits %0d, stalls %0d, mode switches %0d",
             cyc, nout, ovf, zs, sk, hits, stalls, msw);
    check(st[1] && !st[0], "status done/idle");
    check(st[2], "overflow status bit");
    check(ovf > 0, "overflow never happened");
    check(zs > 0, "zero-skip never happened");
    check(sk == 1, "layer skip (early exit) count");
    check(hits > 0, "descriptor prefetch hit never happened");
    check(stalls > 0, "output stall never happened");
    check(msw == 5, "precision mode switches");
    check(nout == 32'((NL - 1) * NUM_CE), "output count register");
    check(lasts == NL - 1, "tlast count");
    for (int l = 0; l < NL; l++)
      check(got_cnt[l] == (L[l].skip ? 0 : NUM_CE), $sformatf("outputs of layer %0d: %0d", l, got_cnt[l]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
