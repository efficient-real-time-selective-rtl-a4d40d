// sdtw_model_pkg: reference model of subsequence DTW for the testbenches.
//
// sdtw_search evaluates the recurrence
//   C[i][j] = |x[i] - y[j]| + min(C[i-1][j], C[i-1][j-1], C[i][j-1])
// with C[0][j] = 0 and C[i][0] = infinity, keeping one column at a time, and
// returns the smallest last-row cost and the first (0-based) reference index
// where it occurs. sdtw_last_row returns every last-row cost C[M][j]. Costs are
// 64-bit here, so the model does not share the hardware's 32-bit wrap; tests
// keep their sample ranges small enough that no cost reaches 2^32.
package sdtw_model_pkg;

  localparam longint MODEL_INF = 64'h7fff_ffff_ffff_ffff;

  function automatic longint abs_diff(int a, int b);
    return (a > b) ? longint'(a - b) : longint'(b - a);
  endfunction

  function automatic longint min3(longint a, longint b, longint c);
    longint m;
    m = (a < b) ? a : b;
    return (m < c) ? m : c;
  endfunction

  // last[j] = C[M][j+1] for j = 0..N-1
  function automatic void sdtw_last_row(input int x[], input int y[], output longint last[]);
    longint col[];   // col[i] = C[i][j-1], i = 0..M
    longint prev_up; // C[i-1][j-1] before it is overwritten
    longint cur;
    int m = x.size();
    int n = y.size();
    col  = new[m + 1];
    last = new[n];
    col[0] = 0;
    for (int i = 1; i <= m; i++) col[i] = MODEL_INF;
    for (int j = 0; j < n; j++) begin
      prev_up = col[0];  // C[0][j-1] = 0
      // col[0] stays 0: C[0][j] = 0
      for (int i = 1; i <= m; i++) begin
        cur     = abs_diff(x[i-1], y[j]) + min3(col[i-1], prev_up, col[i]);
        prev_up = col[i];
        col[i]  = cur;
      end
      last[j] = col[m];
    end
  endfunction

  function automatic void sdtw_search(input int x[], input int y[],
                                      output longint score, output int position);
    longint last[];
    sdtw_last_row(x, y, last);
    score    = MODEL_INF;
    position = -1;
    foreach (last[j]) begin
      if (last[j] < score) begin
        score    = last[j];
        position = j;
      end
    end
  endfunction

endpackage
