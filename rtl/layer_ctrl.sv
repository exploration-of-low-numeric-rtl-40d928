// layer_ctrl: sequencer of one convolution layer.
//
// On start the controller latches the layer descriptor (lpn_pkg::layer_cfg_t)
// and walks the layer in this order, outermost first:
//   output feature group g < kg          (NUM_FEAT features per pass)
//   pooled row py < out_h, pooled column px < out_w
//   window row wy < pool, window column wx < pool
//   filter row ky < kh, filter column kx < kw, input channel group c < cg
// Each step is one beat: it reads the word of input pixel
//   (iy, ix) = ((py*ps+wy)*stride + ky - pad, (px*ps+wx)*stride + kx - pad)
// (ps is the pooling stride)
// and channel group c from the source bank of the feature buffer, at
//   in_base + (iy*in_w + ix)*cg + c,
// and gives the PE array the filter-cache address ((g*kh + ky)*kw + kx)*cg + c.
// A pixel outside the input map (zero padding) is not read and its beat is
// flagged "zero" so that the array sees zero activations. The beat that
// starts a dot product is flagged first, the one that ends it last, and every
// beat carries g as its tag. Because the conv outputs of one pooling window
// follow each other, max pooling needs no line buffer. With overlapping
// windows (pool > pool_stride) the conv outputs shared by two windows are
// computed once for each window.
//
// The write side counts the pooled vectors coming back from the pipeline and
// writes each to the other bank at out_base + (py*out_w + px)*kg + g: the
// output map has the same layout as the input map, with kg channel groups, so
// it can be the next layer's input directly. done pulses for one cycle once
// the last write has reached the buffer; busy is high from start to done.
//
// Timing: one beat per cycle, no bubbles. The read request is registered and
// the beat outputs follow it one cycle later, in the cycle the feature
// buffer's read data for that beat is valid (two cycles after the loop
// counters that produced it). A layer of B beats takes B cycles plus the pipeline latency.
//
// The paper leaves sequencing to the framework it extends; everything here,
// including stride/pad support and the loop order, is this design's choice.
module layer_ctrl
  import lpn_pkg::*;
#(
  parameter int  FB_DEPTH = 65536,
  parameter int  FDEPTH   = 1024,
  parameter int  TAG_W    = 8,
  localparam int FB_AW    = $clog2(FB_DEPTH),
  localparam int FAW      = $clog2(FDEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              busy,
  output logic              done,
  // feature buffer read request
  output logic              fb_rd_en,
  output logic              fb_rd_bank,
  output logic [FB_AW-1:0]  fb_rd_addr,
  // beat, aligned with the feature buffer read data
  output logic              beat_valid,
  output logic              beat_first,
  output logic              beat_last,
  output logic              beat_zero,
  output logic [TAG_W-1:0]  beat_tag,
  output logic [FAW-1:0]    beat_faddr,
  // max-pool control
  output logic              pool_clear,
  output logic [5:0]        pool_count,
  // write back of pooled vectors
  input  logic              wb_valid,
  output logic              fb_wr_en,
  output logic              fb_wr_bank,
  output logic [FB_AW-1:0]  fb_wr_addr
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e     state;
  layer_cfg_t c_q;

  logic [7:0]  g, c;
  logic [11:0] py, px;
  logic [2:0]  wy, wx;
  logic [3:0]  ky, kx;

  // write side
  logic [23:0] w_pix;
  logic [7:0]  w_g;
  logic        fin;     // last write issued; done follows once it has landed

  // beat issued with the read request, one cycle ahead of the read data
  logic               r_valid, r_first, r_last, r_zero;
  logic [TAG_W-1:0]   r_tag;
  logic [FAW-1:0]     r_faddr;

  // current beat
  logic signed [19:0] oy, ox, iy, ix;
  logic               in_map;
  logic               b_first, b_last;
  logic               end_c, end_kx, end_ky, end_wx, end_wy, end_px, end_py, end_g;

  always_comb begin
    oy     = 20'(py) * 20'(c_q.pool_stride) + 20'(wy);
    ox     = 20'(px) * 20'(c_q.pool_stride) + 20'(wx);
    iy     = oy * 20'(c_q.stride) + 20'(ky) - 20'(c_q.pad);
    ix     = ox * 20'(c_q.stride) + 20'(kx) - 20'(c_q.pad);
    in_map = (iy >= 0) && (ix >= 0) && (iy < 20'(c_q.in_h)) && (ix < 20'(c_q.in_w));
    end_c  = (c  == c_q.cg - 8'd1);
    end_kx = (kx == c_q.kw - 4'd1);
    end_ky = (ky == c_q.kh - 4'd1);
    end_wx = (wx == c_q.pool - 3'd1);
    end_wy = (wy == c_q.pool - 3'd1);
    end_px = (px == c_q.out_w - 12'd1);
    end_py = (py == c_q.out_h - 12'd1);
    end_g  = (g  == c_q.kg - 8'd1);
    b_first = (c == 8'd0) && (kx == 4'd0) && (ky == 4'd0);
    b_last  = end_c && end_kx && end_ky;
  end

  assign busy       = (state != S_IDLE);
  assign pool_count = 6'(c_q.pool) * 6'(c_q.pool);
  assign fb_rd_bank = c_q.src_bank;
  assign fb_wr_bank = ~c_q.src_bank;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      c_q        <= '0;
      {g, c, py, px, wy, wx, ky, kx} <= '0;
      w_pix      <= '0;
      w_g        <= '0;
      done       <= 1'b0;
      fin        <= 1'b0;
      pool_clear <= 1'b0;
      fb_rd_en   <= 1'b0;
      fb_rd_addr <= '0;
      beat_valid <= 1'b0;
      {r_valid, r_first, r_last, r_zero, r_tag, r_faddr} <= '0;
      beat_first <= 1'b0;
      beat_last  <= 1'b0;
      beat_zero  <= 1'b0;
      beat_tag   <= '0;
      beat_faddr <= '0;
      fb_wr_en   <= 1'b0;
      fb_wr_addr <= '0;
    end else begin
      done       <= fin;
      fin        <= 1'b0;
      r_valid    <= 1'b0;
      // second stage: the beat meets the read data
      beat_valid <= r_valid;
      beat_first <= r_first;
      beat_last  <= r_last;
      beat_zero  <= r_zero;
      beat_tag   <= r_tag;
      beat_faddr <= r_faddr;
      if (fin) state <= S_IDLE;
      pool_clear <= 1'b0;
      fb_rd_en   <= 1'b0;
      fb_wr_en   <= 1'b0;

      unique case (state)
        S_IDLE: if (start) begin
          c_q        <= cfg;
          {g, c, py, px, wy, wx, ky, kx} <= '0;
          w_pix      <= '0;
          w_g        <= '0;
          pool_clear <= 1'b1;
          state      <= S_RUN;
        end
        S_RUN: begin
          // issue the current beat
          fb_rd_en   <= in_map;
          fb_rd_addr <= FB_AW'(20'(c_q.in_base) + (iy * 20'(c_q.in_w) + ix) * 20'(c_q.cg) + 20'(c));
          r_valid    <= 1'b1;
          r_first    <= b_first;
          r_last     <= b_last;
          r_zero     <= !in_map;
          r_tag      <= TAG_W'(g);
          r_faddr    <= FAW'(((20'(g) * 20'(c_q.kh) + 20'(ky)) * 20'(c_q.kw) + 20'(kx)) * 20'(c_q.cg) + 20'(c));
          // advance the loop nest
          c <= end_c ? 8'd0 : c + 8'd1;
          if (end_c) begin
            kx <= end_kx ? 4'd0 : kx + 4'd1;
            if (end_kx) begin
              ky <= end_ky ? 4'd0 : ky + 4'd1;
              if (end_ky) begin
                wx <= end_wx ? 3'd0 : wx + 3'd1;
                if (end_wx) begin
                  wy <= end_wy ? 3'd0 : wy + 3'd1;
                  if (end_wy) begin
                    px <= end_px ? 12'd0 : px + 12'd1;
                    if (end_px) begin
                      py <= end_py ? 12'd0 : py + 12'd1;
                      if (end_py) begin
                        g <= end_g ? 8'd0 : g + 8'd1;
                        if (end_g) state <= S_DRAIN;
                      end
                    end
                  end
                end
              end
            end
          end
        end
        default: ;
      endcase

      // write side, active in RUN and DRAIN
      if (state != S_IDLE && !fin && wb_valid) begin
        fb_wr_en   <= 1'b1;
        fb_wr_addr <= FB_AW'(24'(c_q.out_base) + w_pix * 24'(c_q.kg) + 24'(w_g));
        if (w_pix == 24'(c_q.out_h) * 24'(c_q.out_w) - 24'd1) begin
          w_pix <= '0;
          w_g   <= w_g + 8'd1;
          if (w_g == c_q.kg - 8'd1) fin <= 1'b1;
        end else begin
          w_pix <= w_pix + 24'd1;
        end
      end
    end
  end

endmodule
