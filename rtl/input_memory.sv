// input_memory: input memory of a CM core, a streaming line buffer that turns
// a raster stream of pixels into convolution windows.
//
// The paper has the input memory keep "the pixel neighbourhood required for
// the convolution". A core starts computing as soon as it holds enough
// activations for its layer. The smallest store that allows this for a KxK
// kernel on a W-wide map is (K-1)*W + K pixels. Here that is DEPTH =
// 2*MAX_W + 3 pixels. One more slot lets the next pixel be written in the
// same clock in which the window needing the oldest pixel is read. Without
// it the stream would run at half rate. So DEPTH = 2*MAX_W + 4 pixels, kept
// in a circular buffer, each pixel all C_MAX channels of one position. How
// the buffer is organised is this design's choice.
//
// Operation. Pixels arrive in raster order on in_*. Output positions are
// produced in raster order. Output (r, c) is centred on input (S*r, S*c),
// S being the stride. With a 3x3 kernel and zero padding of 1, the window
// is complete once input pixel (min(S*r+1, H-1), min(S*c+1, W-1)) has
// arrived. A new pixel is accepted only if it would not overwrite the
// oldest pixel the pending window still needs. That is the stall this
// memory applies to the link feeding it. A 1x1 kernel (the ResNet
// resampling layers) uses only the centre. Out-of-map taps read as zero.
// When gpool is set, the memory performs global average pooling (a
// pre-processing step of the convolution). It sums every channel over the
// map and outputs one window holding the mean (rounded down), taken as a right shift by
// log2(H*W). H*W must be a power of two.
//
// Timing. A window is registered: win_valid rises the clock after the pixel
// that completes it is accepted. Up to one window per clock. win holds the
// taps in order ky*3+kx, tap 0 for a 1x1 kernel. win_last marks the last
// window of a map, after which the memory starts on the next map.
module input_memory #(
  parameter int unsigned C_MAX    = 64,
  parameter int unsigned ACT_BITS = 8,
  parameter int unsigned MAX_W    = 32,
  parameter int unsigned MAX_H    = 32
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  pp5_pkg::layer_cfg_t                    cfg,
  input  logic                                   in_valid,
  output logic                                   in_ready,
  input  logic [C_MAX-1:0][ACT_BITS-1:0]         in_data,
  output logic                                   win_valid,
  input  logic                                   win_ready,
  output logic [8:0][C_MAX-1:0][ACT_BITS-1:0]    win,
  output logic                                   win_last
);

  localparam int unsigned DEPTH = 2 * MAX_W + 4;
  localparam int unsigned PIXW  = $clog2(MAX_W * MAX_H + 1) + 1;  // signed math
  localparam int unsigned SUMW  = ACT_BITS + $clog2(MAX_W * MAX_H + 1);

  typedef logic [C_MAX-1:0][ACT_BITS-1:0] pixel_t;
  typedef logic signed [PIXW:0] idx_t;

  pixel_t                  mem [DEPTH];
  logic [$clog2(DEPTH)-1:0] wp;          // slot of pixel number in_cnt
  idx_t                    in_cnt;       // pixels accepted in this map
  idx_t                    orow, ocol;   // next output position
  logic                    out_done;     // every window of this map emitted
  logic signed [C_MAX-1:0][SUMW-1:0] sum; // global pooling sums

  // Map geometry from the configuration.
  idx_t h, w, oh, ow, npix, pad, cr, cc;
  assign h    = idx_t'(cfg.h);
  assign w    = idx_t'(cfg.w);
  assign npix = h * w;
  assign pad  = cfg.k3 ? idx_t'(1) : idx_t'(0);
  assign oh   = cfg.gpool ? idx_t'(1) : (cfg.stride2 ? (h + 1) >>> 1 : h);
  assign ow   = cfg.gpool ? idx_t'(1) : (cfg.stride2 ? (w + 1) >>> 1 : w);
  assign cr   = cfg.stride2 ? orow <<< 1 : orow;
  assign cc   = cfg.stride2 ? ocol <<< 1 : ocol;

  function automatic idx_t imin(idx_t a, idx_t b); return (a < b) ? a : b; endfunction
  function automatic idx_t imax(idx_t a, idx_t b); return (a > b) ? a : b; endfunction

  // Newest and oldest input pixel the pending window needs.
  idx_t newest, oldest;
  always_comb begin
    if (cfg.gpool) begin
      newest = npix - 1;
      oldest = npix - 1;
    end else begin
      newest = imin(cr + pad, h - 1) * w + imin(cc + pad, w - 1);
      oldest = imax(cr - pad, 0) * w + imax(cc - pad, 0);
    end
  end

  logic can_emit, emit, accept;
  assign can_emit = !out_done && (npix > 0) && (in_cnt > newest);  // idle until configured
  assign emit     = can_emit && (!win_valid || win_ready);
  assign in_ready = (in_cnt < npix) && (out_done || (in_cnt < oldest + idx_t'(DEPTH)));
  assign accept   = in_valid && in_ready;

  // Circular-buffer slot of input pixel number p (p within DEPTH of in_cnt).
  function automatic logic [$clog2(DEPTH)-1:0] slot_of(idx_t p);
    idx_t a = idx_t'(wp) - (in_cnt - p);
    if (a < 0) a = a + idx_t'(DEPTH);
    return a[$clog2(DEPTH)-1:0];
  endfunction

  // log2 of the pixel count, for the pooling mean.
  function automatic int log2_of(idx_t n);
    int l = 0;
    for (int i = 0; i <= int'(PIXW); i++) if (n[i]) l = i;
    return l;
  endfunction

  // Window gather for the pending output position.
  logic [8:0][C_MAX-1:0][ACT_BITS-1:0] win_d;
  idx_t ty, tx;
  always_comb begin
    win_d = '0;
    ty    = '0;
    tx    = '0;
    if (cfg.gpool) begin
      for (int ch = 0; ch < int'(C_MAX); ch++)
        win_d[0][ch] = ACT_BITS'($signed(sum[ch]) >>> log2_of(npix));
    end else if (!cfg.k3) begin
      win_d[0] = mem[slot_of(cr * w + cc)];
    end else begin
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++) begin
          ty = cr + idx_t'(ky) - 1;
          tx = cc + idx_t'(kx) - 1;
          if (ty >= 0 && ty < h && tx >= 0 && tx < w)
            win_d[ky*3+kx] = mem[slot_of(ty * w + tx)];
        end
    end
  end

  logic last_pos;
  assign last_pos = (orow == oh - 1) && (ocol == ow - 1);

  always_ff @(posedge clk) begin
    if (accept) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      in_cnt    <= '0;
      orow      <= '0;
      ocol      <= '0;
      out_done  <= 1'b0;
      win_valid <= 1'b0;
      win_last  <= 1'b0;
      win       <= '0;
      sum       <= '0;
    end else begin
      if (win_valid && win_ready) win_valid <= 1'b0;
      if (emit) begin
        win_valid <= 1'b1;
        win       <= win_d;
        win_last  <= last_pos;
        if (last_pos) begin
          out_done <= 1'b1;
        end else if (ocol == ow - 1) begin
          ocol <= '0;
          orow <= orow + 1;
        end else begin
          ocol <= ocol + 1;
        end
      end
      if (accept) begin
        in_cnt <= in_cnt + 1;
        wp     <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
        if (cfg.gpool)
          for (int ch = 0; ch < int'(C_MAX); ch++)
            sum[ch] <= $signed(sum[ch]) + SUMW'($signed(in_data[ch]));
      end
      // Map finished on both sides: start the next one.
      if ((out_done || (emit && last_pos)) && (in_cnt + idx_t'(accept) == npix)) begin
        in_cnt   <= '0;
        wp       <= '0;
        orow     <= '0;
        ocol     <= '0;
        out_done <= 1'b0;
        sum      <= '0;
      end
    end
  end

endmodule
