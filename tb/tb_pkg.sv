// tb_pkg: reference functions shared by the testbenches. The pixel content
// of the simulated detector is a pure function of (DHP frame, link, row,
// column), so the testbenches can work out what any stage must produce
// without looking at the design.
package tb_pkg;
  import dhh_pkg::*;

  function automatic int unsigned mix(input int unsigned a);
    int unsigned x = a * 32'h9E3779B1;
    x ^= x >> 15;
    x *= 32'h85EBCA77;
    x ^= x >> 13;
    return x;
  endfunction

  // is there a hit at this pixel? occupancy in 1/1000
  function automatic bit hit_at(input int f, input int l, input int r, input int c, input int occ);
    return (mix(f * 1000003 + l * 7919 + r * 131 + c * 7 + 12345) % 1000) < occ;
  endfunction

  function automatic logic [7:0] adc_at(input int f, input int l, input int r, input int c);
    return 8'(mix(f * 31 + l * 17 + r * 1009 + c * 3 + 999) >> 7) | 8'h01;
  endfunction

  // body words (row headers and hits) of rows lo..hi-1 of frame f
  function automatic void rows_words(ref logic [15:0] q[$], input int f, input int l,
                                     input int lo, input int hi, input int cols, input int occ);
    for (int r = lo; r < hi; r++) begin
      bit any = 0;
      for (int c = 0; c < cols; c++) if (hit_at(f, l, r, c, occ)) any = 1;
      if (any) begin
        q.push_back(row_word(10'(r)));
        for (int c = 0; c < cols; c++)
          if (hit_at(f, l, r, c, occ)) q.push_back(hit_word(6'(c), adc_at(f, l, r, c)));
      end
    end
  endfunction

  // the event a trigger at (first_row, frame) must give on link l
  function automatic void event_words(ref logic [15:0] q[$], input int trig, input int first_row,
                                      input int f, input int l, input int rows, input int cols,
                                      input int occ);
    q.delete();
    q.push_back(16'(trig));
    rows_words(q, f + 1, l, 0, first_row, cols, occ);
    rows_words(q, f, l, first_row, rows, cols, occ);
  endfunction
endpackage
