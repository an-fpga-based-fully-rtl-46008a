// bg_ref_pkg: bit-exact software model of the bilateral grid, used by the testbenches.
//
// It computes the same fixed-point result as the RTL, but directly from the definitions and
// with whole-frame 3-D arrays: grid(x,y,z) += (1, f) at the rounded feature vector, a 3x3x3
// weighted blur normalised by the blurred counts, and a trilinear sample at every pixel.  It
// knows nothing of planes, partitions, windows or schedules, so it checks those independently.
package bg_ref_pkg;

  class bg_ref #(int W = 64, int H = 48, int R = 8, int SR = 70, int SS = 8);
    localparam int GX = H / R + 2;
    localparam int GY = W / R + 2;
    localparam int GZ = (255 * SS) / (R * SR) + 2;

    int cnt [GX][GY][GZ];
    int sum [GX][GY][GZ];
    int gf  [GX][GY][GZ];   // Q8.4

    static function int rnd(int a, int r);
      return (2 * a + r) / (2 * r);
    endfunction

    static function longint weight(int d2);
      real e;
      e = $exp(-real'(d2) * real'(R * R) / (2.0 * real'(SS * SS)));
      return longint'($floor(e * 1024.0 + 0.5));
    endfunction

    function void build(ref byte unsigned img []);
      foreach (cnt[x, y, z]) begin cnt[x][y][z] = 0; sum[x][y][z] = 0; end
      for (int ix = 0; ix < H; ix++)
        for (int iy = 0; iy < W; iy++) begin
          int l, gx_, gy_, gz_;
          l   = int'(img[ix * W + iy]);
          gx_ = rnd(ix, R);
          gy_ = rnd(iy, R);
          gz_ = rnd(l * SS, R * SR);
          cnt[gx_][gy_][gz_] += 1;
          sum[gx_][gy_][gz_] += l;
        end
      foreach (gf[x, y, z]) begin
        longint nm, dn;
        nm = 0; dn = 0;
        for (int dx = -1; dx <= 1; dx++)
          for (int dy = -1; dy <= 1; dy++)
            for (int dz = -1; dz <= 1; dz++) begin
              int a, b, c;
              a = x + dx; b = y + dy; c = z + dz;
              if (a >= 0 && a < GX && b >= 0 && b < GY && c >= 0 && c < GZ) begin
                longint wgt;
                wgt = weight(dx * dx + dy * dy + dz * dz);
                nm += wgt * sum[a][b][c];
                dn += wgt * cnt[a][b][c];
              end
            end
        gf[x][y][z] = (dn == 0) ? 0 : int'((nm * 16 + dn / 2) / dn);
      end
    endfunction

    function int pixel(int ix, int iy, int l);
      int q, y0, wx, wy, z0, fz;
      longint acc;
      q  = ix / R; y0 = iy / R;
      wx = ((ix % R) * 256 + R / 2) / R;
      wy = ((iy % R) * 256 + R / 2) / R;
      z0 = (l * SS) / (R * SR);
      fz = (((l * SS) % (R * SR)) * 256 + (R * SR) / 2) / (R * SR);
      acc = 0;
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++)
          for (int k = 0; k < 2; k++) begin
            longint c;
            int cx, cy, cz;
            cx = (i != 0) ? wx : 256 - wx;
            cy = (j != 0) ? wy : 256 - wy;
            cz = (k != 0) ? fz : 256 - fz;
            c = longint'(cx) * longint'(cy) * longint'(cz);
            acc += c * gf[q + i][y0 + j][z0 + k];
          end
      acc = (acc + (longint'(1) << 27)) >>> 28;
      return (acc > 255) ? 255 : int'(acc);
    endfunction
  endclass

endpackage
