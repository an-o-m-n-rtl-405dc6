// clf_ref_pkg: untimed reference model of the Cache-Like Filter, used by the
// testbenches to work out expected counts independently of the RTL.
//
// The model keeps, per sensor row and per sensor column, an array of S
// stored events {valid, t mod 2^BW_T, other coordinate} and a FIFO pointer,
// and processes events strictly one after another:
//   count(line) = stored events of that line with |c - c_s| <= D_TH and
//                 (t - t_s) mod 2^BW_T <= T_th
//   module sum  = count(own line), plus the counts of the in-range lines
//                 own +- 1 .. D_TH unless read cancellation applies
//                 (READ_CANCEL and count(own line) > 0)
//   then the event is written at slot (pointer + 1) mod S of its own line.
// It also counts how often each mechanism of the filter was exercised.
package clf_ref_pkg;

  class line_store;
    int unsigned n_lines, s, bw_t;
    bit          valid[][];
    int unsigned ts[][];
    int unsigned cs[][];
    int unsigned wpt[];
    int unsigned n_evict;  // writes that replaced a valid stored event

    function new(int unsigned n_lines, int unsigned s, int unsigned bw_t);
      this.n_lines = n_lines;
      this.s       = s;
      this.bw_t    = bw_t;
      valid = new[n_lines];
      ts    = new[n_lines];
      cs    = new[n_lines];
      wpt   = new[n_lines];
      foreach (valid[i]) begin
        valid[i] = new[s];
        ts[i]    = new[s];
        cs[i]    = new[s];
        foreach (valid[i][k]) valid[i][k] = 1'b0;
        wpt[i] = s - 1;
      end
      n_evict = 0;
    endfunction

    function int unsigned count(int unsigned line, int unsigned c, int unsigned t,
                                int unsigned t_th, int unsigned d_th);
      longint unsigned mask = (64'd1 << bw_t) - 1;
      int unsigned n = 0;
      for (int k = 0; k < int'(s); k++) begin
        int dc = int'(c) - int'(cs[line][k]);
        longint unsigned dt = (longint'(t) - longint'(ts[line][k])) & mask;
        if (dc < 0) dc = -dc;
        if (valid[line][k] && dc <= int'(d_th) && dt <= t_th) n++;
      end
      return n;
    endfunction

    function void insert(int unsigned line, int unsigned c, int unsigned t);
      longint unsigned mask = (64'd1 << bw_t) - 1;
      wpt[line] = (wpt[line] + 1) % s;
      if (valid[line][wpt[line]]) n_evict++;
      valid[line][wpt[line]] = 1'b1;
      ts[line][wpt[line]]    = int'(longint'(t) & mask);
      cs[line][wpt[line]]    = c;
    endfunction
  endclass

  class clf_model;
    int unsigned cols, rows, s_rm, s_cm, bw_t, d_th;
    bit          read_cancel;
    line_store   rows_st, cols_st;
    // mechanism counters
    int unsigned n_cancel;    // module results where neighbour reads were cancelled
    int unsigned n_border;    // window lines that fell off the sensor
    int unsigned n_same_line; // events in the same row or column as the one before
    int unsigned n_signal, n_noise;
    int unsigned prev_x, prev_y;
    bit          have_prev;

    function new(int unsigned cols, int unsigned rows, int unsigned s_rm, int unsigned s_cm,
                 int unsigned bw_t, int unsigned d_th, bit read_cancel);
      this.cols = cols; this.rows = rows; this.s_rm = s_rm; this.s_cm = s_cm;
      this.bw_t = bw_t; this.d_th = d_th; this.read_cancel = read_cancel;
      if (s_rm > 0) rows_st = new(rows, s_rm, bw_t);
      if (s_cm > 0) cols_st = new(cols, s_cm, bw_t);
      n_cancel = 0; n_border = 0; n_same_line = 0; n_signal = 0; n_noise = 0;
      have_prev = 0;
    endfunction

    function int unsigned module_sum(line_store st, int unsigned own, int unsigned n_lines,
                                     int unsigned oth, int unsigned t, int unsigned t_th);
      int unsigned own_cnt = st.count(own, oth, t, t_th, d_th);
      int unsigned sum = own_cnt;
      if (read_cancel && own_cnt != 0) begin
        n_cancel++;
      end else begin
        for (int d = -int'(d_th); d <= int'(d_th); d++) begin
          int l = int'(own) + d;
          if (d == 0) continue;
          if (l < 0 || l >= int'(n_lines)) begin n_border++; continue; end
          sum += st.count(l, oth, t, t_th, d_th);
        end
      end
      st.insert(own, oth, t);
      return sum;
    endfunction

    // process one event; returns the summed count, sets row/column parts
    function int unsigned process(int unsigned x, int unsigned y, int unsigned t,
                                  int unsigned t_th, int unsigned n_cr,
                                  output int unsigned row_cnt, output int unsigned col_cnt,
                                  output bit is_signal);
      if (have_prev && (x == prev_x || y == prev_y)) n_same_line++;
      prev_x = x; prev_y = y; have_prev = 1;
      row_cnt = (s_rm > 0) ? module_sum(rows_st, y, rows, x, t, t_th) : 0;
      col_cnt = (s_cm > 0) ? module_sum(cols_st, x, cols, y, t, t_th) : 0;
      is_signal = (row_cnt + col_cnt) >= n_cr;
      if (is_signal) n_signal++; else n_noise++;
      return row_cnt + col_cnt;
    endfunction

    function int unsigned n_evict();
      return ((s_rm > 0) ? rows_st.n_evict : 0) + ((s_cm > 0) ? cols_st.n_evict : 0);
    endfunction
  endclass

endpackage
