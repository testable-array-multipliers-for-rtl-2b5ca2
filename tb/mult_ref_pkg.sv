// Reference model of the C-testable array multiplier for the testbenches.
//
// ref_array() evaluates an n x n array (n <= 64) cell by cell with plain
// integer arithmetic, from the cell equations (cout, pout) = xy + cin + pin
// and the connections of the design-for-test array: row r shifted one place
// left of row r-1, ci into the right border, pi into the top row, and the
// left-border column input taken from the carry out of the row above in
// normal mode or from the right-border sum of the row above in test mode.
// It shares no code with the RTL.
package mult_ref_pkg;

  localparam int MAXN = 64;

  typedef struct {
    logic [MAXN-1:0]   co;
    logic [MAXN-1:0]   po;
    logic [2*MAXN-1:0] p;
    logic [2:0]        pat [MAXN][MAXN];  // {xy, cin, pin} seen by cell (r, j)
  } ref_out_t;

  function automatic ref_out_t ref_array(int n, bit tm,
                                         logic [MAXN-1:0] x, logic [MAXN-1:0] y,
                                         logic [MAXN-1:0] ci, logic [MAXN-1:0] pi);
    ref_out_t o;
    bit s [MAXN][MAXN];
    bit c [MAXN][MAXN];
    o.co = '0;
    o.po = '0;
    o.p  = '0;
    for (int r = 0; r < n; r++) begin
      for (int j = 0; j < n; j++) begin
        int cin, pin, tot;
        cin = (j == 0) ? int'(ci[r]) : int'(c[r][j-1]);
        if (r == 0)           pin = int'(pi[j]);
        else if (j < n - 1)   pin = int'(s[r-1][j+1]);
        else if (tm)          pin = int'(s[r-1][0]);
        else                  pin = int'(c[r-1][n-1]);
        tot = int'(x[r]) * int'(y[j]) + cin + pin;
        o.pat[r][j] = {x[r] & y[j], cin[0], pin[0]};
        s[r][j] = tot[0];
        c[r][j] = tot[1];
      end
    end
    for (int r = 0; r < n; r++) o.co[r] = c[r][n-1];
    for (int j = 0; j < n; j++) o.po[j] = s[n-1][j];
    for (int r = 0; r < n - 1; r++) o.p[r] = s[r][0];
    for (int j = 0; j < n; j++) o.p[n-1+j] = s[n-1][j];
    o.p[2*n-1] = c[n-1][n-1];
    return o;
  endfunction

  // Table II of the paper as 2-bit fields {odd index, even index}:
  // x, y, ci, pi, co, po for vectors 0..4.
  localparam logic [11:0] TABLE2 [5] = '{
    12'b11_00_00_11_00_11,
    12'b01_11_10_00_10_00,
    12'b10_11_01_11_01_11,
    12'b11_10_11_10_11_01,
    12'b11_01_00_01_00_10
  };

  function automatic logic [MAXN-1:0] rep2(logic [1:0] f);
    logic [MAXN-1:0] v;
    for (int i = 0; i < MAXN; i++) v[i] = f[i % 2];
    return v;
  endfunction

endpackage
