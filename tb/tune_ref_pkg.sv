// tune_ref_pkg: testbench-side reference of the tuning algorithm and a
// generator of test images.
//
// tune_ref computes, independently of the RTL, the tuned image I3 from a
// blank face I1 and a component image I2 (row-major, w columns by h rows):
// every interior pixel whose I2 value exceeds t becomes
//   floor((I1*CI + 2*FI*I2) / (CI + 2*FI))
// with FI and CI the 3x3 sums of I1 and I2 around it; all other pixels keep
// I1.  It also counts blended and threshold-rejected interior pixels.
//
// make_images builds a smooth face with noise (values 60..220) and a black
// component image with dark noise below 16 and a few bright rectangular
// "components" (eyes, nose, lips), one of which touches the image border.
package tune_ref_pkg;

  function automatic void tune_ref(input int w, input int h, input int t,
                                   ref int face[], ref int comp[], ref int res[],
                                   output int nblend, output int nskip);
    longint fi, ci, num, den;
    nblend = 0;
    nskip  = 0;
    res = new[w * h];
    for (int a = 0; a < w * h; a++) res[a] = face[a];
    for (int r = 1; r < h - 1; r++) begin
      for (int c = 1; c < w - 1; c++) begin
        if (comp[r * w + c] > t) begin
          fi = 0;
          ci = 0;
          for (int dr = -1; dr <= 1; dr++)
            for (int dc = -1; dc <= 1; dc++) begin
              fi += longint'(face[(r + dr) * w + c + dc]);
              ci += longint'(comp[(r + dr) * w + c + dc]);
            end
          num = face[r * w + c] * ci + 2 * fi * comp[r * w + c];
          den = ci + 2 * fi;
          res[r * w + c] = int'(num / den);
          nblend++;
        end else begin
          nskip++;
        end
      end
    end
  endfunction

  function automatic void fill_rect(input int w, input int h, ref int comp[],
                                    input int r0, input int c0, input int rh,
                                    input int cw, input int lvl);
    for (int r = r0; r < r0 + rh && r < h; r++)
      for (int c = c0; c < c0 + cw && c < w; c++)
        comp[r * w + c] = lvl + int'($urandom % 40);
  endfunction

  function automatic void make_images(input int w, input int h,
                                      ref int face[], ref int comp[]);
    face = new[w * h];
    comp = new[w * h];
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        face[r * w + c] = 60 + (r * 100) / h + (c * 40) / w + int'($urandom % 21);
        comp[r * w + c] = int'($urandom % 16);
      end
    // eyebrows, eyes, nose, lips, scaled to the image; one at the border
    fill_rect(w, h, comp, h / 4,     w / 6,     1, w / 4, 30);
    fill_rect(w, h, comp, h / 4,     w * 7 / 12, 1, w / 4, 30);
    fill_rect(w, h, comp, h / 3,     w / 6,     2, w / 5, 120);
    fill_rect(w, h, comp, h / 3,     w * 7 / 12, 2, w / 5, 120);
    fill_rect(w, h, comp, h * 2 / 5, w * 2 / 5, h / 4, w / 6, 90);
    fill_rect(w, h, comp, h * 3 / 4, w / 3,     2, w / 3, 170);
    fill_rect(w, h, comp, 0,         w - 2,     3, 2, 200);
  endfunction

endpackage
