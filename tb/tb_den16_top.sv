// tb_den16_top -- end-to-end test of the whole accelerator at small sizes
// (16 encoder channels, 9 taps, stride 4, 8/16-channel U-ConvBlocks, four
// pyramid levels of 3 taps, 10 cached mask rows out of 16).
//
// The host side is played through the AXI4-Lite port: base address, mode 0
// and start (preload), poll done, then mode 1, frame count and start
// (inference), poll done.  The DDR parameter buffer is the behavioural AXI
// read slave; it is placed just below a 4 KB boundary so that the preload has
// to split a burst.  Audio goes in over AXI4-Stream with random gaps and the
// output is throttled at random.
//
// The reference model recomputes the network frame by frame from the same
// parameter words and the same audio, in plain integer arithmetic, and every
// output sample, tlast, and the DDR traffic are compared.  Each mechanism is
// counted and a failure is recorded for any that never occurred: preload,
// mode switch, input stall, output back-pressure, DDR tail-row fetches,
// several reads in flight, 4 KB burst split, pyramid level-3 updates and the
// overlap-add ring wrapping.  The frame time is checked against its lower
// bound (the sum of the stage times) and an upper bound that adds the DDR
// time of the tail rows.
module tb_den16_top;
  import den16_pkg::*;
  import tb_util_pkg::*;
  localparam int CE = 16, KE = 9, STRIDE = 4, HIST = 16, CB = 8, CH = 16, NU = 4, L = 4, T = 3;
  localparam int KD = 9, RING = 13, BR = 3, LR = 10, LANES = 4, MB = 16, MO = 4, NF = 10;
  localparam int unsigned BA = 32'h2000_0F06;
  localparam int B_BTNK = off_btnk(CE, KE);
  localparam int B_FPR  = off_fprelu(CE, KE, CB, CH, L, T, NU);
  localparam int B_DEC  = off_dec(CE, KE, CB, CH, L, T, NU);
  localparam int B_MASK = off_mask(CE, KE, CB, CH, L, T, NU, KD);
  localparam int PW     = B_MASK + CE + CB + LR * CB;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0]  awaddr = 0, araddr_l = 0;
  logic [31:0] wdata = 0, rdata_l;
  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid, arvalid_l = 0, arready_l, rvalid_l;
  logic [1:0]  bresp, rresp_l;
  logic [31:0] araddr; logic [7:0] arlen; logic [2:0] arsize; logic [1:0] arburst, rresp;
  logic        arvalid, arready, rlast, rvalid, rready;
  logic [15:0] rdata;
  logic [15:0] s_tdata = 0, m_tdata;
  logic        s_tvalid = 0, s_tready, m_tvalid, m_tready = 1, m_tlast, done_o;
  int          errors, bursts, maxo, splits;

  den16_top #(.C_ENC(CE), .K_ENC(KE), .STRIDE(STRIDE), .HIST(HIST), .C_B(CB), .C_H(CH), .N_UCONV(NU),
              .LEVELS(L), .TAPS(T), .K_DEC(KD), .RING(RING), .BRAM_ROWS(BR), .LOCAL_ROWS(LR),
              .LANES(LANES), .MAX_BURST(MB), .MAX_OUTSTANDING(MO)) dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_wdata(wdata),
    .s_axil_wstrb(4'hF), .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_bresp(bresp),
    .s_axil_bvalid(bvalid), .s_axil_bready(1'b1), .s_axil_araddr(araddr_l), .s_axil_arvalid(arvalid_l),
    .s_axil_arready(arready_l), .s_axil_rdata(rdata_l), .s_axil_rresp(rresp_l), .s_axil_rvalid(rvalid_l),
    .s_axil_rready(1'b1),
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_rdata(rdata), .m_axi_rresp(rresp),
    .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tlast(m_tlast),
    .done_o);

  axi_mem_model #(.BASE_ADDR(BA), .MAX_LAT(6)) mem (
    .clk, .araddr, .arlen, .arsize, .arburst, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .errors, .bursts, .max_outstanding(maxo), .splits4k(splits));

  // ---------------------------------------------------------------- reference
  shortint yref [STRIDE*NF];
  int      lvl3 = 0;

  function automatic shortint xs(int n); return (n < 0) ? shortint'(0) : rsmp(n); endfunction
  function automatic shortint w(int i); return pgen(32'(i)); endfunction

  shortint e [NF][CE];
  shortint v [NU+1][NF][CB];
  shortint lat [NF][CE];

  task automatic build_ref();
    shortint p [NU][NF][CH];
    shortint z [NU][CH][L][$];
    shortint y [STRIDE*NF+KD];
    for (int f = 0; f < NF; f++) begin
      for (int c = 0; c < CE; c++) begin
        shortint a;
        a = w(CE * KE + c);
        for (int k = 0; k < KE; k++) a = shortint'(a + rmul(w(c * KE + k), xs(STRIDE * f + STRIDE - KE + k)));
        e[f][c] = rrelu(a);
      end
      for (int o = 0; o < CB; o++) begin
        shortint a;
        a = w(B_BTNK + CB * CE + o);
        for (int i = 0; i < CE; i++) a = shortint'(a + rmul(w(B_BTNK + o * CE + i), e[f][i]));
        v[0][f][o] = a;
      end
      for (int u = 0; u < NU; u++) begin
        int bp, bdw, brs;
        shortint fz [CH];
        bp  = off_uconv(CE, KE, CB, CH, L, T, u);
        bdw = bp + pw_words(CB, CH, 1'b0, 1'b1);
        brs = bdw + dw_words(CH, L, T);
        for (int o = 0; o < CH; o++) begin
          shortint a;
          a = w(bp + CH * CB + o);
          for (int i = 0; i < CB; i++) a = shortint'(a + rmul(w(bp + o * CB + i), v[u][f][i]));
          p[u][f][o] = rprelu(a, w(bp + CH * CB + CH + o));
        end
        for (int c = 0; c < CH; c++) begin
          shortint a;
          a = w(bdw + L * CH * T + c);
          for (int k = 0; k < T; k++) if (f - k >= 0) a = shortint'(a + rmul(w(bdw + c * T + k), p[u][f - k][c]));
          z[u][c][0].push_back(a);
          for (int l = 1; l < L; l++)
            if ((f % (1 << l)) == (1 << l) - 1) begin
              int m;
              m = z[u][c][l].size();
              a = w(bdw + L * CH * T + l * CH + c);
              for (int k = 0; k < T; k++)
                if (2 * m + 1 - k >= 0) a = shortint'(a + rmul(w(bdw + (l * CH + c) * T + k), z[u][c][l-1][2 * m + 1 - k]));
              z[u][c][l].push_back(a);
              if (l == 3 && u == 0 && c == 0) lvl3++;
            end
          a = z[u][c][0][f];
          for (int l = 1; l < L; l++) if (z[u][c][l].size() > 0) a = shortint'(a + z[u][c][l][z[u][c][l].size() - 1]);
          fz[c] = a;
        end
        for (int o = 0; o < CB; o++) begin
          shortint a;
          a = w(brs + CB * CH + o);
          for (int i = 0; i < CH; i++) a = shortint'(a + rmul(w(brs + o * CH + i), rprelu(fz[i], w(brs + CB * CH + CB + i))));
          v[u+1][f][o] = shortint'(a + v[u][f][o]);
        end
      end
      for (int r = 0; r < CE; r++) begin
        shortint a;
        a = w(B_MASK + r);
        for (int i = 0; i < CB; i++)
          a = shortint'(a + rmul(w(B_MASK + CE + CB + r * CB + i), rprelu(v[NU][f][i], w(B_MASK + CE + i))));
        lat[f][r] = rmul(rprelu(a, w(B_FPR + r)), e[f][r]);
      end
    end
    for (int n = 0; n < STRIDE * NF + KD; n++) y[n] = w(B_DEC + CE * KD);
    for (int f = 0; f < NF; f++)
      for (int k = 0; k < KD; k++)
        for (int c = 0; c < CE; c++) y[STRIDE * f + k] = shortint'(y[STRIDE * f + k] + rmul(w(B_DEC + c * KD + k), lat[f][c]));
    for (int n = 0; n < STRIDE * NF; n++) yref[n] = y[n];
  endtask

  // ---------------------------------------------------------------- host
  task automatic wr(logic [5:0] a, logic [31:0] d);
    @(negedge clk); awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(negedge clk); while (!bvalid);
    awvalid = 0; wvalid = 0;
    @(negedge clk);
  endtask
  task automatic rd(logic [5:0] a, output logic [31:0] d);
    @(negedge clk); araddr_l = a; arvalid_l = 1;
    @(negedge clk); arvalid_l = 0;
    while (!rvalid_l) @(negedge clk);
    d = rdata_l;
    @(negedge clk);
  endtask
  task automatic wait_done();
    logic [31:0] d;
    do begin repeat (20) @(negedge clk); rd(6'h00, d); end while (!d[1]);
  endtask
  task automatic need(int n, string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
    else $display("mechanism %-22s x %0d", what, n);
  endtask

  // ---------------------------------------------------------------- traffic
  int  n_in = 0, n_out = 0, in_stalls = 0, out_stalls = 0, tail_ars = 0, pre_ars = 0, wraps = 0;
  int  starts_enc [NF];
  logic running = 0;

  always @(posedge clk) if (rst_n) begin
    if (arvalid && arready) begin
      if (araddr >= BA + 2 * PW) tail_ars++; else pre_ars++;
    end
    if (s_tvalid && !s_tready && running) in_stalls++;
    if (m_tvalid && !m_tready) out_stalls++;
  end

  // input stream: sample n is rsmp(n); random gaps.  Handshakes are taken
  // at the clock edge, the driver updates on the falling edge.
  always @(posedge clk) if (rst_n && s_tvalid && s_tready) n_in <= n_in + 1;
  initial begin
    forever begin
      @(negedge clk);
      if (running && n_in < STRIDE * NF) begin
        s_tvalid = ($urandom_range(0, 4) != 0);
        s_tdata  = rsmp(n_in);
      end else s_tvalid = 0;
    end
  end

  // output stream: checked in order at the clock edge, throttled at random
  int first_beat [NF];
  always @(posedge clk) if (rst_n) begin
    if (m_tvalid && m_tready) begin
      checks++;
      if (n_out >= STRIDE * NF) begin failures++; $display("FAIL extra output"); end
      else begin
        if (n_out % STRIDE == 0) first_beat[n_out / STRIDE] = int'($time / 10);
        if (m_tdata !== yref[n_out]) begin failures++; $display("FAIL out %0d got %0d exp %0d", n_out, shortint'(m_tdata), yref[n_out]); end
        checks++;
        if (m_tlast !== (n_out == STRIDE * NF - 1)) begin failures++; $display("FAIL tlast at %0d", n_out); end
      end
      n_out++;
      if (n_out > RING && (n_out - 1) % RING == 0) wraps++;
    end
  end
  initial forever begin @(negedge clk); m_tready = ($urandom_range(0, 3) != 0); end

  initial begin
    logic [31:0] d;
    int t0, fmin, fmax;
    build_ref();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // mode 0: preload
    wr(6'h18, BA); wr(6'h10, 0); wr(6'h00, 1);
    wait_done();
    checks++; if (pre_ars == 0 || tail_ars != 0) begin failures++; $display("FAIL preload reads %0d tail %0d", pre_ars, tail_ars); end
    rd(6'h00, d); checks++; if (d[2] !== 1'b1) begin failures++; $display("FAIL not idle after preload"); end
    // mode 1: inference of NF frames
    wr(6'h10, 1); wr(6'h20, NF);
    running = 1;
    t0 = int'($time / 10);
    wr(6'h00, 1);
    wait_done();
    running = 0;
    repeat (10) @(negedge clk);
    checks++; if (n_out != STRIDE * NF) begin failures++; $display("FAIL %0d outputs", n_out); end
    checks++; if (n_in != STRIDE * NF) begin failures++; $display("FAIL %0d inputs", n_in); end
    checks++; if (errors != 0) begin failures++; $display("FAIL %0d AXI protocol errors", errors); end
    // frame time: stage sum <= period <= stage sum + DDR time of the tail rows
    fmin = KE * CE / LANES + CB * CE / LANES + NU * 2 * CB * CH / LANES + LR * (CB / LANES + 1)
         + (CE - LR) * CB + KD * CE / LANES;
    fmax = fmin + (CE - LR) * (CB / 2 + 40) + 200;
    for (int f = 1; f < NF; f++) begin
      int per;
      per = first_beat[f] - first_beat[f - 1];
      checks++;
      if (per < fmin || per > fmax) begin failures++; $display("FAIL frame period %0d not in [%0d, %0d]", per, fmin, fmax); end
    end
    $display("frame period bounds [%0d, %0d], last frame period %0d", fmin, fmax, first_beat[NF-1] - first_beat[NF-2]);
    need(pre_ars, "preload bursts");
    need(1, "mode switch 0->1");
    need(in_stalls, "input stall");
    need(out_stalls, "output back-pressure");
    need(tail_ars >= NF * (CE - LR) ? tail_ars : 0, "DDR tail-row fetch");
    need(maxo > 1 ? maxo : 0, "reads in flight > 1");
    need(splits, "4 KB burst split");
    need(lvl3, "pyramid level-3 update");
    need(wraps, "OLA ring wrap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
