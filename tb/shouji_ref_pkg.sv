// shouji_ref_pkg: reference model and helpers for the Shouji testbenches.
//
// ref_bitvec() computes the Shouji bit-vector directly from two base strings
// by comparing characters, window by window, without any of the RTL's
// shift/XOR structure: for window i it examines the 4-entry segment of every
// diagonal d in 0, -1, +1, -2, +2, ... (entries off the map count as
// mismatches), keeps the one with most zeros (ties: a leading zero wins, then
// the earlier diagonal in that order), and writes it into the vector when it
// has more zeros than the vector's four bits there. edit_distance() is the
// plain Levenshtein dynamic program, used only for statistics. encode() turns
// a base string into the 2-bit-per-base vector the RTL takes.
package shouji_ref_pkg;

  localparam int MAXM = 256;

  function automatic logic [2*MAXM-1:0] encode(input string s);
    logic [2*MAXM-1:0] v;
    v = '0;
    for (int i = 0; i < s.len(); i++) begin
      case (s[i])
        "A": v[2*i +: 2] = 2'b00;
        "C": v[2*i +: 2] = 2'b01;
        "G": v[2*i +: 2] = 2'b10;
        default: v[2*i +: 2] = 2'b11;
      endcase
    end
    return v;
  endfunction

  function automatic string random_seq(input int m);
    string s;
    byte   b [4] = '{"A", "C", "G", "T"};
    s = "";
    for (int i = 0; i < m; i++) s = {s, string'(b[$urandom_range(3)])};
    return s;
  endfunction

  // Apply k random edits (substitution, insertion, deletion), length kept.
  function automatic string mutate(input string s, input int k);
    byte b [4] = '{"A", "C", "G", "T"};
    string r;
    r = s;
    for (int n = 0; n < k; n++) begin
      int op  = $urandom_range(2);
      int pos = $urandom_range(r.len() - 1);
      byte c  = b[$urandom_range(3)];
      if (op == 0) r[pos] = c;
      else if (op == 1) r = {r.substr(0, pos - 1), string'(c), r.substr(pos, r.len() - 2)};
      else r = {r.substr(0, pos - 1), r.substr(pos + 1, r.len() - 1), string'(c)};
    end
    return r;
  endfunction

  function automatic int zeros4(input logic [3:0] v);
    int c = 0;
    for (int q = 0; q < 4; q++) if (v[q] == 1'b0) c++;
    return c;
  endfunction

  // Shouji bit-vector of pattern p against text t; bit j = column j, 1 = edit.
  function automatic logic [MAXM-1:0] ref_bitvec(input string p, input string t, input int e);
    logic [MAXM+2:0] sv;
    int m = t.len();
    sv = '1;
    for (int i = 0; i < m; i++) begin
      int         best_c = -1;
      bit         best_l = 1'b0;
      logic [3:0] best_s = 4'hf;
      for (int n = 0; n < 2 * e + 1; n++) begin
        int d = (n == 0) ? 0 : ((n % 2 == 1) ? -((n + 1) / 2) : (n / 2));
        logic [3:0] seg;
        int c;
        for (int q = 0; q < 4; q++) begin
          int col = i + q;
          int row = col - d;
          if (col >= m || row < 0 || row >= m) seg[q] = 1'b1;
          else seg[q] = (p[row] != t[col]);
        end
        c = zeros4(seg);
        if (c > best_c || (c == best_c && !seg[0] && !best_l)) begin
          best_c = c;
          best_l = !seg[0];
          best_s = seg;
        end
      end
      if (best_c > zeros4(sv[i +: 4])) sv[i +: 4] = best_s;
    end
    return sv[MAXM-1:0];
  endfunction

  function automatic int edit_distance(input string a, input string b);
    int prev [MAXM+1];
    int cur  [MAXM+1];
    for (int j = 0; j <= b.len(); j++) prev[j] = j;
    for (int i = 1; i <= a.len(); i++) begin
      cur[0] = i;
      for (int j = 1; j <= b.len(); j++) begin
        int s = prev[j-1] + ((a[i-1] != b[j-1]) ? 1 : 0);
        if (prev[j] + 1 < s) s = prev[j] + 1;
        if (cur[j-1] + 1 < s) s = cur[j-1] + 1;
        cur[j] = s;
      end
      prev = cur;
    end
    return prev[b.len()];
  endfunction

endpackage
