// tb_vq_pkg: test pictures, a stream producer's word packing and reference
// results for the video quality testbenches.
//
// Pictures are computed, not stored: pix() gives the luminance of pixel (x, y)
// for a picture kind and seed, so frames of any size (up to 8K) cost no memory.
// mb_word() packs microblock m (0 top-left, 1 top-right, 2 bottom-left,
// 3 bottom-right) of shifted block (bx, by) the way the host sends it: the
// block starts at pixel (1+8*bx, 1+8*by) because the first row and column are
// dropped, and sample p(4c+r+1) is the pixel in column c, row r of the
// microblock, placed in bits [8k-1:8k-8].
// ref_frame() works the expected results out from pixel coordinates
// (block borders, row patterns, sorted block sums), independently of the
// microblock numbering the hardware uses.
package tb_vq_pkg;

  typedef enum int {
    PIC_RANDOM   = 0,  // hashed noise
    PIC_FLAT     = 1,  // one grey level everywhere (blackout)
    PIC_STRIPES  = 2,  // alternating bright/dark rows (interlace)
    PIC_FLAT_D4  = 3,  // flat, one pixel brighter by 4 (still blackout)
    PIC_FLAT_D5  = 4,  // flat, one pixel brighter by 5 (no blackout)
    PIC_BLOCKY   = 5,  // 8x8 tiles of random level plus small noise
    PIC_DARK     = 6,  // noise in 0..31 (underexposed)
    PIC_STRIPES2 = 7   // stripes with the opposite phase
  } pic_e;

  typedef struct {
    longint unsigned intra, inter, interlace;
    int unsigned     exposure;
    bit              blackout;
    longint unsigned n_mb;
  } ref_t;

  function automatic int unsigned hash(int unsigned a, int unsigned b, int unsigned c);
    int unsigned h;
    h = a * 32'h9E3779B1 ^ (b + 32'h7F4A7C15) * 32'h85EBCA77 ^ c * 32'hC2B2AE3D;
    h ^= h >> 15; h *= 32'h2C1B3C6D; h ^= h >> 12; h *= 32'h297A2D39; h ^= h >> 15;
    return h;
  endfunction

  function automatic byte unsigned pix(pic_e kind, int unsigned seed, int x, int y);
    int unsigned h = hash(x, y, seed);
    int unsigned base = 40 + (seed % 150);
    case (kind)
      PIC_RANDOM:   return byte'(h);
      PIC_FLAT:     return byte'(base);
      PIC_STRIPES:  return byte'((y % 2 == 0) ? 180 + h % 40 : 20 + h % 40);
      PIC_STRIPES2: return byte'((y % 2 == 1) ? 180 + h % 40 : 20 + h % 40);
      PIC_FLAT_D4:  return byte'((x == 1 && y == 1) ? base + 4 : base);
      PIC_FLAT_D5:  return byte'((x == 1 && y == 1) ? base + 5 : base);
      PIC_BLOCKY:   return byte'((hash(x / 8, y / 8, seed + 7) % 200) + h % 8);
      PIC_DARK:     return byte'(h % 32);
      default:      return byte'(h);
    endcase
  endfunction

  function automatic int unsigned blocks_x(int w); return (w - 1) / 8; endfunction
  function automatic int unsigned blocks_y(int h); return (h - 1) / 8; endfunction

  function automatic logic [127:0] header_word(int w, int h);
    logic [127:0] d = '0;
    d[15:0]  = 16'(w);
    d[31:16] = 16'(h);
    return d;
  endfunction

  function automatic logic [127:0] mb_word(pic_e kind, int unsigned seed, int bx, int by, int m);
    logic [127:0] d;
    int x0 = 1 + 8 * bx + ((m % 2) ? 4 : 0);
    int y0 = 1 + 8 * by + ((m >= 2) ? 4 : 0);
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        d[8*(4*c+r) +: 8] = pix(kind, seed, x0 + c, y0 + r);
    return d;
  endfunction

  // Word number i (0-based) of a frame's data words.
  function automatic logic [127:0] frame_word(pic_e kind, int unsigned seed, int w, int i);
    int blk = i / 4;
    return mb_word(kind, seed, blk % blocks_x(w), blk / blocks_x(w), i % 4);
  endfunction

  function automatic int unsigned ad(int a, int b);
    return (a > b) ? a - b : b - a;
  endfunction

  function automatic ref_t ref_frame(pic_e kind, int unsigned seed, int w, int h);
    ref_t r;
    int unsigned bxn = blocks_x(w), byn = blocks_y(h);
    int unsigned sums[$];
    int unsigned lo[4], hi[4];
    int unsigned ext;
    int rows[6] = '{0, 1, 2, 3, 4, 7};
    r = '{default: 0};
    r.n_mb = 4 * bxn * byn;
    for (int by = 0; by < byn; by++) begin
      for (int bx = 0; bx < bxn; bx++) begin
        int x0 = 1 + 8 * bx, y0 = 1 + 8 * by;
        int unsigned s = 0;
        // shifted block: right border between local columns 6|7, lower border
        // between local rows 6|7; lines 0,1,2,3,4 and 7 are sampled
        foreach (rows[i]) begin
          int l = rows[i];
          r.inter += ad(pix(kind, seed, x0 + 7, y0 + l), pix(kind, seed, x0 + 6, y0 + l));
          r.intra += ad(pix(kind, seed, x0 + 6, y0 + l), pix(kind, seed, x0 + 5, y0 + l));
          r.inter += ad(pix(kind, seed, x0 + l, y0 + 7), pix(kind, seed, x0 + l, y0 + 6));
          r.intra += ad(pix(kind, seed, x0 + l, y0 + 6), pix(kind, seed, x0 + l, y0 + 5));
        end
        for (int yy = 0; yy < 8; yy++)
          for (int xx = 0; xx < 8; xx++) s += pix(kind, seed, x0 + xx, y0 + yy);
        sums.push_back(s);
        // interlace: each 4x4 quarter, rows alternate in every column
        for (int q = 0; q < 4; q++) begin
          bit up = 1, dn = 1;
          int qx = x0 + 4 * (q % 2), qy = y0 + 4 * (q / 2);
          for (int c = 0; c < 4; c++) begin
            int a = pix(kind, seed, qx + c, qy), b = pix(kind, seed, qx + c, qy + 1);
            int e = pix(kind, seed, qx + c, qy + 2), f = pix(kind, seed, qx + c, qy + 3);
            up &= (a > b) && (e > b) && (e > f);
            dn &= (a < b) && (e < b) && (e < f);
          end
          if (up || dn) r.interlace++;
        end
      end
    end
    sums.sort();
    for (int i = 0; i < 4; i++) begin
      lo[i] = (i < sums.size()) ? sums[i] : 16384;
      hi[i] = (i < sums.size()) ? sums[sums.size() - 1 - i] : 0;
    end
    ext = 0;
    for (int i = 0; i < 4; i++) ext += (lo[i] >> 2) + (hi[i] >> 2);
    r.exposure = (ext >> 7) & 255;
    r.blackout = !((hi[0] - lo[0]) > 4);
    return r;
  endfunction

  function automatic logic [127:0] ref_word(ref_t r);
    logic [127:0] d = '0;
    d[127]    = r.blackout;
    d[103:96] = 8'(r.exposure);
    d[95:64]  = 32'(r.interlace);
    d[63:32]  = 32'(r.inter);
    d[31:0]   = 32'(r.intra);
    return d;
  endfunction

endpackage
