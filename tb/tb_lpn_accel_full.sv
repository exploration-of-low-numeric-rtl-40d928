// tb_lpn_accel_full: end-to-end test of the accelerator at the default sizes (64 words, 48 PEs + 4 DSP engines).
//
// The test loads an input map into bank 0 of the feature buffer, random
// ternary filters into the filter cache and random (gamma, beta) pairs into the
// batch-norm table, runs a sequence of layers (each reading the bank the
// previous one wrote) and compares every output word with a reference model
// computed in the test: an integer convolution with zero padding and stride,
// wrap-around to 16 bits, binary32 scale and shift evaluated through double
// precision, ReLU and rounding quantisation to 2 bits, and max pooling.
// Filters and parameters are reloaded before each layer, as a host would.
//
// It also counts how often each mechanism of the design was exercised and
// counts a failure for any that never happened: zero-padding beats, multi-beat
// dot products, zero and negative weights, negative dot products, ReLU
// clipping, saturation at the top code, pooling windows, more than one output
// group, the bank swap between layers, overlapping pooling windows and
// non-zero results from the packed-DSP engines. Throughput is checked too: the array must receive one
// beat per cycle, and a layer must finish within its beat count plus the
// pipeline depth.
`timescale 1ns/1ps
module tb_lpn_accel_full;
  import lpn_pkg::*;
  import tb_fp_pkg::*;

  // the accelerator's default parameters
  localparam int WORDS = 64, NUM_PE = 48, NUM_DSP = 4;
  localparam int FB_DEPTH = 65536, FDEPTH = 1024, GROUPS = 16;
  localparam int NUM_FEAT = NUM_PE + 4 * NUM_DSP;
  localparam int NUM_SLOT = NUM_PE + NUM_DSP;
  localparam int FB_AW = $clog2(FB_DEPTH), FAW = $clog2(FDEPTH);
  localparam int FW = $clog2(NUM_FEAT), GW = $clog2(GROUPS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  layer_cfg_t cfg;
  logic h_fb_wr_en, h_fb_wr_bank, h_fb_rd_en, h_fb_rd_bank;
  logic [FB_AW-1:0] h_fb_wr_addr, h_fb_rd_addr;
  logic [WORDS-1:0][1:0] h_fb_wr_data, h_fb_rd_data, fc_wr_data;
  logic fc_wr_en, prm_wr_en;
  logic [FW-1:0] fc_wr_feat, prm_lane;
  logic [FAW-1:0] fc_wr_addr;
  logic [GW-1:0] prm_group;
  logic [31:0] prm_gamma, prm_beta;

  lpn_accel dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  // reference state
  byte fbm [];                // index: (bank*FB_DEPTH + addr)*WORDS + word
  byte wm  [];                // index: (feature*FDEPTH + addr)*WORDS + word (-1/0/+1)
  logic [31:0] gam [int], bet [int];   // key: group<<8 | feature

  // mechanism counters
  int n_pad_beats = 0, n_multi_beat = 0, n_zero_w = 0, n_neg_w = 0, n_neg_dot = 0;
  int n_relu_clip = 0, n_saturate = 0, n_pool_win = 0, n_groups = 0, n_bank_swap = 0;
  int n_dsp_nonzero = 0, n_beats = 0, n_overlap = 0;

  always @(negedge clk) begin
    if (dut.beat_valid) begin
      n_beats++;
      if (dut.beat_zero) n_pad_beats++;
    end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int wkey(input int f, input int a, input int j);
    return (f * FDEPTH + a) * WORDS + j;
  endfunction

  function automatic int fkey(input int b, input int a, input int j);
    return (b * FB_DEPTH + a) * WORDS + j;
  endfunction

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host_write_fb(input int bank, input int addr);
    @(negedge clk);
    h_fb_wr_en = 1; h_fb_wr_bank = 1'(bank); h_fb_wr_addr = FB_AW'(addr);
    for (int j = 0; j < WORDS; j++) h_fb_wr_data[j] = 2'(fbm[fkey(bank, addr, j)]);
    @(negedge clk);
    h_fb_wr_en = 0;
  endtask

  task automatic load_params(input layer_cfg_t c);
    int nent;
    nent = c.kg * c.kh * c.kw * c.cg;
    for (int f = 0; f < NUM_FEAT; f++)
      for (int a = 0; a < nent; a++) begin
        @(negedge clk);
        fc_wr_en = 1; fc_wr_feat = FW'(f); fc_wr_addr = FAW'(a);
        for (int j = 0; j < WORDS; j++) begin
          int w;
          w = int'($urandom % 3) - 1;
          wm[wkey(f, a, j)] = 8'(w);
          fc_wr_data[j] = (w > 0) ? 2'b01 : (w < 0) ? 2'b11 : 2'b00;
          if (w == 0) n_zero_w++;
          if (w < 0) n_neg_w++;
        end
      end
    @(negedge clk) fc_wr_en = 0;
    for (int g = 0; g < c.kg; g++)
      for (int f = 0; f < NUM_FEAT; f++) begin
        real gr, br;
        gr = (0.5 + real'($urandom % 1000) / 1000.0) / real'(2 * c.kh * c.kw * c.cg);
        if ($urandom % 4 == 0) gr = -gr;
        br = real'(int'($urandom % 1400) - 400) / 1000.0;
        @(negedge clk);
        prm_wr_en = 1; prm_group = GW'(g); prm_lane = FW'(f);
        prm_gamma = real_to_fp32(gr); prm_beta = real_to_fp32(br);
        gam[(g << 8) | f] = prm_gamma; bet[(g << 8) | f] = prm_beta;
      end
    @(negedge clk) prm_wr_en = 0;
  endtask

  // reference for one layer; writes the expected output words into fbm
  task automatic ref_layer(input layer_cfg_t c);
    int sb, db;
    sb = c.src_bank; db = 1 - sb;
    if (c.kh * c.kw * c.cg > 1) n_multi_beat++;
    for (int g = 0; g < c.kg; g++)
      for (int py = 0; py < c.out_h; py++)
        for (int px = 0; px < c.out_w; px++) begin
          int mx [NUM_FEAT];
          foreach (mx[f]) mx[f] = 0;
          if (c.pool > 1) n_pool_win++;
          for (int wy = 0; wy < c.pool; wy++)
            for (int wx = 0; wx < c.pool; wx++)
              for (int f = 0; f < NUM_FEAT; f++) begin
                int acc, q;
                logic signed [15:0] a16;
                real y;
                acc = 0;
                for (int ky = 0; ky < c.kh; ky++)
                  for (int kx = 0; kx < c.kw; kx++) begin
                    int iy, ix;
                    iy = (py * c.pool_stride + wy) * c.stride + ky - c.pad;
                    ix = (px * c.pool_stride + wx) * c.stride + kx - c.pad;
                    if (iy >= 0 && ix >= 0 && iy < c.in_h && ix < c.in_w)
                      for (int ch = 0; ch < c.cg; ch++) begin
                        int fa;
                        fa = ((g * c.kh + ky) * c.kw + kx) * c.cg + ch;
                        for (int j = 0; j < WORDS; j++)
                          acc += int'(fbm[fkey(sb, c.in_base + (iy * c.in_w + ix) * c.cg + ch, j)])
                                 * int'(wm[wkey(f, fa, j)]);
                      end
                  end
                a16 = 16'(acc);
                if (a16 < 0) n_neg_dot++;
                if (f >= NUM_PE && a16 != 0) n_dsp_nonzero++;
                y = fp32_to_real(real_to_fp32(real'(a16) * fp32_to_real(gam[(g << 8) | f])));
                y = fp32_to_real(real_to_fp32(y + fp32_to_real(bet[(g << 8) | f])));
                if (y < 0.0) n_relu_clip++;
                if (y > 1.0) n_saturate++;
                q = quant_ref(y, 3);
                if (q > mx[f]) mx[f] = q;
              end
          for (int f = 0; f < NUM_FEAT; f++)
            fbm[fkey(db, c.out_base + (py * c.out_w + px) * c.kg + g, f)] = 8'(mx[f]);
        end
  endtask

  task automatic run_layer(input layer_cfg_t c, input int idx);
    int conv_h, conv_w, t0, nb, b0;
    conv_h = (int'(c.in_h) + 2 * c.pad - c.kh) / c.stride + 1;
    conv_w = (int'(c.in_w) + 2 * c.pad - c.kw) / c.stride + 1;
    c.out_h = 12'((conv_h - c.pool) / c.pool_stride + 1);
    c.out_w = 12'((conv_w - c.pool) / c.pool_stride + 1);
    load_params(c);
    ref_layer(c);
    if (c.kg > 1) n_groups++;
    if (c.src_bank == 1) n_bank_swap++;
    nb = c.kg * c.out_h * c.out_w * c.pool * c.pool * c.kh * c.kw * c.cg;
    if (c.pool > c.pool_stride) n_overlap++;
    b0 = n_beats;
    @(negedge clk);
    cfg = c; start = 1; t0 = cyc;
    @(negedge clk) start = 0;
    wait (done);
    check(cyc - t0 <= nb + NUM_SLOT + 12, $sformatf("layer %0d: %0d cycles for %0d beats", idx, cyc - t0, nb));
    repeat (2) @(negedge clk);
    check(n_beats - b0 == nb, $sformatf("layer %0d beat count %0d exp %0d", idx, n_beats - b0, nb));
    // read back and compare the whole output map
    for (int g = 0; g < c.kg; g++)
      for (int p = 0; p < c.out_h * c.out_w; p++) begin
        int a, e, errs;
        a = c.out_base + p * c.kg + g;
        @(negedge clk);
        h_fb_rd_en = 1; h_fb_rd_bank = 1'(1 - c.src_bank); h_fb_rd_addr = FB_AW'(a);
        @(negedge clk);
        h_fb_rd_en = 0;
        errs = 0;
        for (int j = 0; j < WORDS; j++) begin
          e = int'(fbm[fkey(1 - c.src_bank, a, j)]);
          if (int'(h_fb_rd_data[j]) != e) begin
            errs++;
            if (errs < 4) $display("  layer %0d word %0d feature %0d: got %0d exp %0d", idx, a, j, h_fb_rd_data[j], e);
          end
        end
        check(errs == 0, $sformatf("layer %0d output word %0d", idx, a));
      end
    $display("layer %0d done: %0d beats, %0d cycles", idx, nb, cyc - t0);
  endtask

  initial begin
    layer_cfg_t c;
    int in_h, in_w, in_cg;
    start = 0; cfg = '0;
    h_fb_wr_en = 0; h_fb_wr_bank = 0; h_fb_wr_addr = '0; h_fb_wr_data = '0;
    h_fb_rd_en = 0; h_fb_rd_bank = 0; h_fb_rd_addr = '0;
    fc_wr_en = 0; fc_wr_feat = '0; fc_wr_addr = '0; fc_wr_data = '0;
    prm_wr_en = 0; prm_group = '0; prm_lane = '0; prm_gamma = '0; prm_beta = '0;
    fbm = new[2 * FB_DEPTH * WORDS];
    wm  = new[NUM_FEAT * FDEPTH * WORDS];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // input image in bank 0
    in_h = 5; in_w = 5; in_cg = 1;
    for (int a = 0; a < in_h * in_w * in_cg; a++) begin
      for (int j = 0; j < WORDS; j++) fbm[fkey(0, a, j)] = 8'($urandom % 4);
      host_write_fb(0, a);
    end
    c = '0;
    c.in_w = 5; c.in_h = 5; c.cg = 1; c.kg = 2; c.kw = 3; c.kh = 3;
    c.stride = 1; c.pad = 1; c.pool = 3; c.pool_stride = 2; c.src_bank = 0;
    c.in_base = 20'd0; c.out_base = 20'd0;
    run_layer(c, 0);
    c = '0;
    c.in_w = 2; c.in_h = 2; c.cg = 2; c.kg = 1; c.kw = 2; c.kh = 2;
    c.stride = 1; c.pad = 0; c.pool = 1; c.pool_stride = 1; c.src_bank = 1;
    c.in_base = 20'd0; c.out_base = 20'd100;
    run_layer(c, 1);

    check(n_pad_beats > 0,   "mechanism: zero-padding beats");
    check(n_multi_beat > 0,  "mechanism: multi-beat dot products");
    check(n_zero_w > 0,      "mechanism: zero weights");
    check(n_neg_w > 0,       "mechanism: negative weights");
    check(n_neg_dot > 0,     "mechanism: negative dot products");
    check(n_relu_clip > 0,   "mechanism: ReLU clipping");
    check(n_saturate > 0,    "mechanism: saturation at the top code");
    check(n_pool_win > 0,    "mechanism: max-pool windows");
    check(n_groups > 0,      "mechanism: several output groups");
    check(n_bank_swap > 0,   "mechanism: bank swap");
    check(n_dsp_nonzero > 0, "mechanism: packed-DSP engine results");
    check(n_overlap > 0,     "mechanism: overlapping pooling windows");
    $display("mechanisms: pad beats %0d, multi-beat layers %0d, zero w %0d, neg w %0d, neg dots %0d, relu clips %0d, saturations %0d, pool windows %0d, multi-group layers %0d, bank swaps %0d, dsp results %0d, overlapping-pool layers %0d",
             n_pad_beats, n_multi_beat, n_zero_w, n_neg_w, n_neg_dot, n_relu_clip, n_saturate,
             n_pool_win, n_groups, n_bank_swap, n_dsp_nonzero, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
