// tb_img_pkg: test image and reference models shared by the testbenches.
//
// img_rgb(x, y, w, h) gives a deterministic RGB444 test picture: two
// rectangles of skin-coloured pixels on a non-skin background, with about
// one pixel in sixteen flipped between skin and non-skin as salt-and-pepper
// noise.  Skin pixels get R - G in 1..4, the others R - G outside that range.
// ref_skin() is an independent statement of the skin rule 10 < 16*(R-G) < 74.
package tb_img_pkg;

  function automatic int unsigned hash2(int unsigned x, int unsigned y, int unsigned salt);
    int unsigned h;
    h = (x * 32'h9E3779B1) ^ ((y + salt) * 32'h85EBCA77);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return h;
  endfunction

  function automatic bit img_mask(int x, int y, int w, int h);
    bit in1, in2;
    in1 = (x >= w / 8) && (x < w / 2) && (y >= h / 8) && (y < (3 * h) / 4);
    in2 = (x >= (5 * w) / 8) && (x < (7 * w) / 8) && (y >= h / 2) && (y < (7 * h) / 8);
    return (in1 || in2) ^ (hash2(x, y, 7) % 16 == 0);
  endfunction

  function automatic logic [11:0] img_rgb(int x, int y, int w, int h);
    int unsigned hv;
    int r, g, b, u;
    hv = hash2(x, y, 99);
    b  = int'(hv % 16);
    if (img_mask(x, y, w, h)) begin
      u = 1 + int'((hv >> 4) % 4);            // 1..4
      g = int'((hv >> 8) % (16 - u));
      r = g + u;
    end else begin
      // R - G in -15..0 or 5..15
      r = int'((hv >> 4) % 16);
      g = int'((hv >> 8) % 16);
      if ((r - g >= 1) && (r - g <= 4)) g = r;   // make it U = 0
    end
    return {4'(r), 4'(g), 4'(b)};
  endfunction

  function automatic bit ref_skin(logic [11:0] rgb);
    int u;
    u = int'(rgb[11:8]) - int'(rgb[7:4]);
    return (16 * u > 10) && (16 * u < 74);
  endfunction

endpackage
