// tb_layer_ctrl: self-checking test of the layer sequencer.
//
// Three layers are run: 3x3 filters with stride 1, one pixel of zero padding
// and 2x2 pooling on a 5x4 map with 2 channel groups and 2 feature groups; 2x2
// filters with stride 2, no padding and no pooling; and 1x1 filters with
// overlapping 3x3 pooling of step 2. The expected beat stream
// (buffer address or zero flag, filter address, first/last, tag) is generated
// by an independent loop nest in the test and compared beat by beat; every
// buffer read must come exactly one cycle before its beat. The test plays the
// pipeline: one pooled vector returns a few cycles after every pool*pool
// finished dot products, and the write addresses and bank are checked, as is
// the single done pulse after the last write.
`timescale 1ns/1ps
module tb_layer_ctrl;
  import lpn_pkg::*;

  localparam int FB_DEPTH = 1024, FDEPTH = 256, TAG_W = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, fb_rd_en, fb_rd_bank, beat_valid, beat_first, beat_last, beat_zero;
  logic pool_clear, wb_valid, fb_wr_en, fb_wr_bank;
  logic [9:0] fb_rd_addr, fb_wr_addr;
  logic [TAG_W-1:0] beat_tag;
  logic [7:0] beat_faddr;
  logic [5:0] pool_count;
  layer_cfg_t cfg;

  layer_ctrl #(.FB_DEPTH(FB_DEPTH), .FDEPTH(FDEPTH), .TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  typedef struct { int addr; bit zero; int faddr; bit first; bit last; int tag; } beat_s;
  beat_s exp_beats [$];
  int    exp_wr [$];
  int    rd_cyc [$], rd_addr_q [$];
  int    lasts = 0, n_done = 0, wb_pending [$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitors, sampled between edges
  always @(negedge clk) begin
    if (rst_n) begin
      if (fb_rd_en) begin
        rd_cyc.push_back(cyc);
        rd_addr_q.push_back(int'(fb_rd_addr));
        check(fb_rd_bank == cfg.src_bank, "read bank");
      end
      if (beat_valid) begin
        beat_s e;
        e = exp_beats.pop_front();
        check(beat_zero == e.zero, "zero flag");
        check(int'(beat_faddr) == e.faddr && beat_first == e.first && beat_last == e.last
              && int'(beat_tag) == e.tag, $sformatf("beat fields faddr %0d/%0d", beat_faddr, e.faddr));
        if (!e.zero) begin
          check(rd_cyc.size() > 0 && rd_cyc.pop_front() == cyc - 1, "read one cycle before beat");
          check(rd_addr_q.pop_front() == e.addr, "read address");
        end
        if (beat_last) begin
          lasts++;
          if (lasts % (cfg.pool * cfg.pool) == 0) wb_pending.push_back(cyc + 6);
        end
      end
      if (fb_wr_en) begin
        check(int'(fb_wr_addr) == exp_wr.pop_front(), "write address");
        check(fb_wr_bank == !cfg.src_bank, "write bank");
      end
      if (done) begin
        n_done++;
        check(exp_wr.size() == 0 && exp_beats.size() == 0, $sformatf("done after all beats and writes (%0d writes, %0d beats left)", exp_wr.size(), exp_beats.size()));
      end
    end
  end

  // pipeline stand-in
  always @(negedge clk) begin
    wb_valid = 1'b0;
    if (wb_pending.size() > 0 && wb_pending[0] == cyc) begin
      void'(wb_pending.pop_front());
      wb_valid = 1'b1;
    end
  end

  task automatic run_layer(input layer_cfg_t c);
    int conv_h, conv_w, cnt;
    conv_h = (int'(c.in_h) + 2 * c.pad - c.kh) / c.stride + 1;
    conv_w = (int'(c.in_w) + 2 * c.pad - c.kw) / c.stride + 1;
    c.out_h = 12'((conv_h - c.pool) / c.pool_stride + 1);
    c.out_w = 12'((conv_w - c.pool) / c.pool_stride + 1);
    for (int g = 0; g < c.kg; g++)
      for (int py = 0; py < c.out_h; py++)
        for (int px = 0; px < c.out_w; px++) begin
          for (int wy = 0; wy < c.pool; wy++)
            for (int wx = 0; wx < c.pool; wx++)
              for (int ky = 0; ky < c.kh; ky++)
                for (int kx = 0; kx < c.kw; kx++)
                  for (int ch = 0; ch < c.cg; ch++) begin
                    beat_s b;
                    int iy, ix;
                    iy = (py * c.pool_stride + wy) * c.stride + ky - c.pad;
                    ix = (px * c.pool_stride + wx) * c.stride + kx - c.pad;
                    b.zero  = !(iy >= 0 && ix >= 0 && iy < c.in_h && ix < c.in_w);
                    b.addr  = c.in_base + (iy * c.in_w + ix) * c.cg + ch;
                    b.faddr = ((g * c.kh + ky) * c.kw + kx) * c.cg + ch;
                    b.first = (ky == 0 && kx == 0 && ch == 0);
                    b.last  = (ky == c.kh - 1 && kx == c.kw - 1 && ch == c.cg - 1);
                    b.tag   = g;
                    exp_beats.push_back(b);
                  end
        end
    for (int g = 0; g < c.kg; g++)
      for (int p = 0; p < c.out_h * c.out_w; p++)
        exp_wr.push_back(c.out_base + p * c.kg + g);
    cnt = exp_beats.size();
    lasts = 0;
    @(negedge clk);
    cfg = c; start = 1;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    check(pool_count == 6'(c.pool * c.pool), "pool count");
    wait (done);
    repeat (2) @(posedge clk);
    @(negedge clk);
    check(!busy, "idle after done");
    check(exp_beats.size() == 0, $sformatf("all %0d beats issued", cnt));
  endtask

  initial begin
    layer_cfg_t c;
    start = 0; cfg = '0; wb_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    c = '0;
    c.in_w = 5; c.in_h = 4; c.cg = 2; c.kg = 2; c.kw = 3; c.kh = 3;
    c.stride = 1; c.pad = 1; c.pool = 2; c.pool_stride = 2; c.src_bank = 0; c.in_base = 20'd16; c.out_base = 20'd100;
    run_layer(c);
    c = '0;
    c.in_w = 6; c.in_h = 5; c.cg = 1; c.kg = 3; c.kw = 2; c.kh = 2;
    c.stride = 2; c.pad = 0; c.pool = 1; c.pool_stride = 1; c.src_bank = 1; c.in_base = 20'd0; c.out_base = 20'd7;
    run_layer(c);
    // overlapping 3x3 pooling with step 2 on a 7x7 conv output
    c = '0;
    c.in_w = 7; c.in_h = 7; c.cg = 1; c.kg = 1; c.kw = 1; c.kh = 1;
    c.stride = 1; c.pad = 0; c.pool = 3; c.pool_stride = 2; c.src_bank = 0; c.in_base = 20'd0; c.out_base = 20'd200;
    run_layer(c);
    repeat (5) @(posedge clk);
    check(n_done == 3, "one done pulse per layer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
