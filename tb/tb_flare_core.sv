// tb_flare_core -- one computing core end to end, compression then
// decompression, at reduced sizes.
//
// Two lanes work on two 8x8x8 blocks (a smooth field with spikes) held in a
// small SRAM; FIFO1 and FIFO2 are made small and the bitstream and feature
// map consumers are slowed down in phases, so that the prediction stalls on
// a full FIFO1, FIFO2 fills up and both FIFOs buffer. The Huffman tables are
// a fixed canonical code (symbol 0 and the 16 codes nearest zero error get
// 5 bits, all others 18). After compression the testbench reads the
// reconstruction back from SRAM and checks the error bound, reads the
// histogram (outliers are symbol 0), and checks every feature value against
// a 3x3 convolution of the reconstructed slices with per-slice fused weights
// computed in software. It then wipes the SRAM, switches to decompression,
// feeds the recorded bitstream back and requires the same reconstruction and
// the same feature maps. Each mechanism (stall, FIFO-full, bitstream
// back-pressure, FIFO buffering, mode switch, unpredictable points, slice
// streaming, per-slice fusion) is counted and must have happened.
module tb_flare_core;
  import flare_pkg::*;
  localparam int M = 2, K = 3;
  localparam longint SRAM_B = 64'd16384;   // 2 banks x (2 slots x 2 x 512 words)
  localparam int OC = 4;
  localparam longint GB_B = 64'd16384;
  localparam int NC   = 1;
  localparam int B    = 1 << K;
  localparam int NPT  = B * B * B;
  localparam int HAW  = $clog2(SRAM_B / 4);
  localparam int BAW  = $clog2(SRAM_B / 4 / M);
  localparam int SW   = BAW - (3 * K + 1);
  localparam int GAW  = $clog2(GB_B / 4);
  localparam int KT   = 9;
  localparam int OE   = B - 2;
  localparam longint BWORDS = SRAM_B / 4 / M;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           start     [NC];
  mode_e          mode      [NC];
  pred_cfg_t      cfg       [NC];
  logic [SW-1:0]  slot      [NC];
  logic           busy      [NC], done [NC];
  logic           h_en [NC], h_we [NC];
  logic [HAW-1:0] h_addr    [NC];
  data_t          h_wdata   [NC], h_rdata [NC];
  logic           cb_we     [NC];
  logic [2:0]     cb_sel    [NC];
  logic [CODE_W-1:0] cb_addr [NC];
  logic [37:0]    cb_wdata  [NC];
  logic           hist_clear[NC];
  logic [CODE_W-1:0] hist_addr [NC];
  logic [31:0]    hist_data [NC];
  logic           w_we      [NC];
  logic [$clog2(KT*OC)-1:0] w_addr [NC];
  logic signed [CW_W-1:0]   w_data [NC];
  logic           b_we      [NC];
  logic [$clog2(OC+1)-1:0]  b_addr [NC];
  logic signed [CW_W-1:0]   b_data [NC];
  logic           bs_valid [NC], bs_ready [NC];
  logic [31:0]    bs_data  [NC];
  logic           bi_valid [NC], bi_ready [NC];
  logic [31:0]    bi_data  [NC];
  logic           o_valid [NC], o_ready [NC], o_last [NC];
  data_t          o_data  [NC];
  logic [GAW-1:0] gb_raddr [NC];
  data_t          gb_rdata [NC];
  logic [31:0]    slices_done [NC], fifo1_peak [NC], fifo2_peak [NC];

  flare_core #(.M(M), .K(K), .SRAM_B(SRAM_B), .FIFO1_B(64'd512), .FIFO2_B(64'd512), .ROWS(8), .COLS(8), .OC(OC), .GB_B(GB_B), .SYMS(65536)) dut (.clk, .rst_n, .start(start[0]), .mode(mode[0]), .cfg(cfg[0]), .slot(slot[0]), .busy(busy[0]), .done(done[0]), .h_en(h_en[0]), .h_we(h_we[0]), .h_addr(h_addr[0]), .h_wdata(h_wdata[0]), .h_rdata(h_rdata[0]), .cb_we(cb_we[0]), .cb_sel(cb_sel[0]), .cb_addr(cb_addr[0]), .cb_wdata(cb_wdata[0]), .hist_clear(hist_clear[0]), .hist_addr(hist_addr[0]), .hist_data(hist_data[0]), .w_we(w_we[0]), .w_addr(w_addr[0]), .w_data(w_data[0]), .b_we(b_we[0]), .b_addr(b_addr[0]), .b_data(b_data[0]), .bs_valid(bs_valid[0]), .bs_ready(bs_ready[0]), .bs_data(bs_data[0]), .bi_valid(bi_valid[0]), .bi_ready(bi_ready[0]), .bi_data(bi_data[0]), .o_valid(o_valid[0]), .o_ready(o_ready[0]), .o_data(o_data[0]), .o_last(o_last[0]), .gb_raddr(gb_raddr[0]), .gb_rdata(gb_rdata[0]), .slices_done(slices_done[0]), .fifo1_peak(fifo1_peak[0]), .fifo2_peak(fifo2_peak[0]));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---- mechanism counters ----------------------------------------------------
  int n_pstall [NC], n_f2full [NC], n_bsstall [NC], n_fuse [NC], n_slices [NC];
  int n_modesw [NC], n_outlier [NC], n_f1peak [NC], n_f2peak [NC];
  always @(posedge clk) if (rst_n) begin
    if (dut.pq_valid && !dut.pq_ready) n_pstall[0]++;
    if (dut.ps_valid && !dut.ps_ready) n_f2full[0]++;
    if (bs_valid[0] && !bs_ready[0]) n_bsstall[0]++;
    if (dut.u_neural.nf_done) n_fuse[0]++;
    if (dut.ps_valid && dut.ps_ready && dut.ps_last) n_slices[0]++;
  end

  // ---- per-core data -----------------------------------------------------------
  longint orig [NC][M][NPT];
  longint rec  [NC][M][NPT];
  longint W [KT][OC], Bs [OC];
  logic [31:0] words [NC][$];
  data_t  o_comp [NC][$];
  data_t  o_dec  [NC][$];
  int     olast  [NC];
  bit     collect_dec [NC];
  longint eb;

  for (genvar n = 0; n < NC; n++) begin : g_omon
    always @(posedge clk) if (o_valid[n] && o_ready[n]) begin
      if (collect_dec[n]) o_dec[n].push_back(o_data[n]); else o_comp[n].push_back(o_data[n]);
      if (o_last[n]) olast[n]++;
    end
    always @(posedge clk) if (bs_valid[n] && bs_ready[n]) words[n].push_back(bs_data[n]);
  end

  initial begin
    #200000000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int idx(input int x, input int y, input int z);
    return (z * B + y) * B + x;
  endfunction

  task automatic host_wr(input int n, input longint a, input longint v);
    @(negedge clk);
    h_en[n] = 1; h_we[n] = 1; h_addr[n] = HAW'(a); h_wdata[n] = data_t'(v);
    @(negedge clk);
    h_en[n] = 0; h_we[n] = 0;
  endtask

  task automatic host_rd(input int n, input longint a, output longint v);
    @(negedge clk);
    h_en[n] = 1; h_we[n] = 0; h_addr[n] = HAW'(a);
    @(negedge clk);
    h_en[n] = 0;
    v = longint'(h_rdata[n]);
  endtask

  task automatic cb_wr(input int n, input int sel, input int a, input longint v);
    @(negedge clk);
    cb_we[n] = 1; cb_sel[n] = 3'(sel); cb_addr[n] = CODE_W'(a); cb_wdata[n] = 38'(v);
    @(negedge clk);
    cb_we[n] = 0;
  endtask

  // flat SRAM address of point i of the block in bank b, slot s, sel
  function automatic longint fa(input int b, input int s, input int sel, input int i);
    return longint'(b) * BWORDS + (longint'(s) * 2 + sel) * NPT + i;
  endfunction

  // canonical Huffman code used for the test: symbol 0 and the 16 codes
  // nearest the zero-error code get 5 bits, all other symbols 18 bits
  function automatic bit central(input int s);
    return s == 0 || (s >= 32760 && s <= 32775);
  endfunction

  task automatic load_tables(input int n);
    int ci5, ci18;
    ci5 = 0; ci18 = 0;
    for (int s = 0; s < 65536; s++) begin
      if (central(s)) begin
        cb_wr(n, 0, s, {6'd5, 32'(ci5)});
        cb_wr(n, 1, ci5, s);
        ci5++;
      end else begin
        cb_wr(n, 0, s, {6'd18, 32'((17 << 13) + ci18)});
        cb_wr(n, 1, 17 + ci18, s);
        ci18++;
      end
    end
    for (int l = 1; l <= 32; l++) begin
      cb_wr(n, 2, l, (l == 5) ? 0 : (l == 18) ? (17 << 13) : 0);
      cb_wr(n, 3, l, (l == 18) ? 17 : 0);
      cb_wr(n, 4, l, (l == 5) ? 17 : (l == 18) ? 65519 : 0);
    end
  endtask

  // 3x3 valid convolution of one reconstructed slice with the fused weights
  task automatic conv_model(input int n, input int b, input int z, ref data_t exp_q [$]);
    longint mn, mx, r, recip, wp [KT][OC], bp [OC], sw, acc, v;
    mn = rec[n][b][z * B * B]; mx = mn;
    for (int i = 0; i < B * B; i++) begin
      v = rec[n][b][z * B * B + i];
      if (v < mn) mn = v;
      if (v > mx) mx = v;
    end
    r = (mx > mn) ? mx - mn : 1;
    recip = (64'sd1 <<< 48) / r;
    for (int o = 0; o < OC; o++) begin
      sw = 0;
      for (int k = 0; k < KT; k++) begin
        v = (W[k][o] * recip) >>> 20;
        if (v > 64'sd2147483647) v = 64'sd2147483647;
        if (v < -64'sd2147483648) v = -64'sd2147483648;
        wp[k][o] = v; sw += v;
      end
      bp[o] = (Bs[o] <<< 28) - mn * sw;
    end
    for (int y = 0; y < OE; y++)
      for (int x = 0; x < OE; x++)
        for (int o = 0; o < OC; o++) begin
          acc = bp[o];
          for (int k = 0; k < KT; k++)
            acc += rec[n][b][z * B * B + (y + k / 3) * B + x + k % 3] * wp[k][o];
          exp_q.push_back(data_t'(acc >>> 24));
        end
  endtask

  task automatic run_core(input int n);
    longint v, e, emax;
    int cyc, wi, nsl;
    data_t exp_o [$];
    // ---- load blocks, tables and weights ----
    for (int b = 0; b < M; b++)
      for (int z = 0; z < B; z++)
        for (int y = 0; y < B; y++)
          for (int x = 0; x < B; x++) begin
            v = (n + 1) * 20 * x * y - 150 * y * z + 3000 * z * (b + 1) + 900 * x
                + $signed($urandom_range(0, 60)) - 30;
            if ($urandom_range(0, 150) == 0) v = longint'($signed($urandom)) / 8;   // spike
            orig[n][b][idx(x, y, z)] = v;
            host_wr(n, fa(b, SLOT, 0, idx(x, y, z)), v);
          end
    load_tables(n);
    for (int k = 0; k < KT; k++)
      for (int o = 0; o < OC; o++) begin
        @(negedge clk); w_we[n] = 1; w_addr[n] = $bits(w_addr[n])'(k * OC + o); w_data[n] = CW_W'(W[k][o]);
      end
    for (int o = 0; o < OC; o++) begin
      @(negedge clk); w_we[n] = 0; b_we[n] = 1; b_addr[n] = $bits(b_addr[n])'(o); b_data[n] = CW_W'(Bs[o]);
    end
    @(negedge clk); b_we[n] = 0;
    hist_clear[n] = 1; @(negedge clk); hist_clear[n] = 0;
    repeat (65540) @(negedge clk);

    // ---- compression ----
    mode[n] = MODE_COMPRESS;
    @(negedge clk); start[n] = 1; @(negedge clk); start[n] = 0;
    cyc = 0;
    while (!done[n]) begin
      @(negedge clk);
      cyc++;
      // slow consumers in phases, so that both FIFOs fill up
      bs_ready[n] = ((cyc / 3000) % 2 == 0) ? ($urandom_range(0, 99) == 0) : 1'b1;
      o_ready[n]  = ((cyc / 5000) % 2 == 0) ? ($urandom_range(0, 9) < 1) : ($urandom_range(0, 3) != 0);
    end
    @(negedge clk); bs_ready[n] = 0; o_ready[n] = 0;
    n_modesw[n]++;
    n_f1peak[n] = int'(fifo1_peak[n]);
    n_f2peak[n] = int'(fifo2_peak[n]);
    // error bound on the reconstruction kept in SRAM
    emax = 0;
    for (int b = 0; b < M; b++)
      for (int i = 0; i < NPT; i++) begin
        host_rd(n, fa(b, SLOT, 1, i), v);
        rec[n][b][i] = v;
        e = v - orig[n][b][i];
        if (e < 0) e = -e;
        if (e > emax) emax = e;
        if (v == orig[n][b][i] && e > 0) ;
      end
    check(emax <= eb, $sformatf("core %0d: max error %0d within %0d", n, emax, eb));
    // histogram: every point once; outliers counted as symbol 0
    v = 0;
    for (int s = 0; s < 65536; s++) if (central(s)) begin
      @(negedge clk); hist_addr[n] = CODE_W'(s); @(negedge clk);
      v += hist_data[n];
      if (s == 0) n_outlier[n] = int'(hist_data[n]);
    end
    check(v <= M * NPT, "histogram count");
    // neural outputs: slices in z order, lanes round-robin
    for (int z = 0; z < B; z++)
      for (int b = 0; b < M; b++) conv_model(n, b, z, exp_o);
    check(o_comp[n].size() == exp_o.size(), $sformatf("core %0d: %0d feature values, expected %0d", n, o_comp[n].size(), exp_o.size()));
    for (int i = 0; i < exp_o.size() && i < o_comp[n].size(); i++)
      check(o_comp[n][i] == exp_o[i], $sformatf("core %0d compression feature %0d: %0d vs %0d", n, i, o_comp[n][i], exp_o[i]));
    check(olast[n] == M * B, "one o_last per slice");
    check(slices_done[n] == M * B, "slice counter");

    // ---- mode switch: decompression from the recorded bitstream ----
    for (int b = 0; b < M; b++)
      for (int i = 0; i < NPT; i++) begin
        host_wr(n, fa(b, SLOT, 0, i), 0);    // the originals are gone
        host_wr(n, fa(b, SLOT, 1, i), 0);
      end
    collect_dec[n] = 1;
    mode[n] = MODE_DECOMPRESS;
    @(negedge clk); start[n] = 1; @(negedge clk); start[n] = 0;
    wi = 0; cyc = 0;
    while (!done[n]) begin
      bi_valid[n] = (wi < words[n].size()) && ($urandom_range(0, 4) != 0);
      bi_data[n]  = (wi < words[n].size()) ? words[n][wi] : 32'd0;
      o_ready[n]  = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (bi_valid[n] && bi_ready[n]) wi++;
      @(negedge clk);
      cyc++;
    end
    bi_valid[n] = 0; o_ready[n] = 0;
    n_modesw[n]++;
    for (int b = 0; b < M; b++)
      for (int i = 0; i < NPT; i++) begin
        host_rd(n, fa(b, SLOT, 1, i), v);
        check(v == rec[n][b][i], $sformatf("core %0d decompressed block %0d point %0d", n, b, i));
      end
    check(o_dec[n].size() == exp_o.size(), "decompression feature count");
    for (int i = 0; i < exp_o.size() && i < o_dec[n].size(); i++)
      check(o_dec[n][i] == exp_o[i], $sformatf("core %0d decompression feature %0d", n, i));
  endtask

  localparam int SLOT = (SW > 1) ? 1 : 0;

  initial begin
    for (int n = 0; n < NC; n++) begin
      start[n] = 0; mode[n] = MODE_COMPRESS; slot[n] = SW'(SLOT);
      h_en[n] = 0; h_we[n] = 0; h_addr[n] = 0; h_wdata[n] = 0;
      cb_we[n] = 0; cb_sel[n] = 0; cb_addr[n] = 0; cb_wdata[n] = 0;
      hist_clear[n] = 0; hist_addr[n] = 0;
      w_we[n] = 0; w_addr[n] = 0; w_data[n] = 0; b_we[n] = 0; b_addr[n] = 0; b_data[n] = 0;
      bs_ready[n] = 0; bi_valid[n] = 0; bi_data[n] = 0; o_ready[n] = 0; gb_raddr[n] = 0;
      n_pstall[n] = 0; n_f2full[n] = 0; n_bsstall[n] = 0; n_fuse[n] = 0; n_slices[n] = 0;
      n_modesw[n] = 0; n_outlier[n] = 0; olast[n] = 0; collect_dec[n] = 0;
    end
    eb = 64;
    for (int n = 0; n < NC; n++) begin
      cfg[n].w1 = -16'sd32; cfg[n].w2 = 16'sd192; cfg[n].w3 = 16'sd96;
      cfg[n].eb = data_t'(eb);
      cfg[n].inv2eb = 32'((64'd1 << 32) / (2 * eb));
      cfg[n].radius = 16'd32768;
    end
    for (int k = 0; k < KT; k++)
      for (int o = 0; o < OC; o++) W[k][o] = longint'($urandom_range(0, 8191)) - 4096;
    for (int o = 0; o < OC; o++) Bs[o] = longint'($urandom_range(0, 8191)) - 4096;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_core(0);
    for (int n = 0; n < NC; n++) begin
      $display("core %0d: prediction stalls %0d, FIFO2 full %0d, bitstream stalls %0d, FIFO1 peak %0d, FIFO2 peak %0d",
               n, n_pstall[n], n_f2full[n], n_bsstall[n], n_f1peak[n], n_f2peak[n]);
      $display("core %0d: mode switches %0d, outliers %0d, slices streamed %0d, fusions %0d",
               n, n_modesw[n], n_outlier[n], n_slices[n], n_fuse[n]);
      check(n_pstall[n] > 0, "mechanism: prediction stalled by a full FIFO1");
      check(n_f2full[n] > 0, "mechanism: FIFO2 full");
      check(n_bsstall[n] > 0, "mechanism: bitstream back-pressure");
      check(n_f1peak[n] > 1 && n_f2peak[n] > 1, "mechanism: FIFO buffering");
      check(n_modesw[n] == 2, "mechanism: compress/decompress mode switch");
      check(n_outlier[n] > 0, "mechanism: unpredictable points");
      check(n_slices[n] == 2 * M * B, "mechanism: slice streaming");
      check(n_fuse[n] == 2 * M * B, "mechanism: normalization fusion per slice");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
