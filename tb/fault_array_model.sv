// Gate-level model of the design-for-test array multiplier with one
// injectable single stuck-at fault, for fault simulation in testbenches.
//
// Each cell is modelled as the gates of mult_cell and full_adder: g0 = x & y,
// t = g0 ^ pin, s = t ^ cin, g1 = g0 & pin, g2 = t & cin, cout = g1 | g2, and
// the x and y wires passed on to the neighbours. With fault_on = 1 the site
// fault_site of cell (fault_row, fault_col) is held at fault_val. Sites are
// every gate input pin and output of the cell and its two pass-on wires:
//    0 g0.x    1 g0.y    2 g0 out   3 t.a     4 t.b     5 t out
//    6 s.a     7 s.b     8 s out    9 g1.a   10 g1.b   11 g1 out
//   12 g2.a   13 g2.b   14 g2 out  15 or.a   16 or.b   17 cout
//   18 x passed on     19 y passed on
// The connections between cells, the border inputs and the test-mode
// multiplexers are those of dft_array_mult; the multiplexers are assumed
// fault-free. Behavioural, for simulation only.
module fault_array_model #(
  parameter int N = 16
) (
  input  logic         test_mode,
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  input  logic [N-1:0] ci,
  input  logic [N-1:0] pi,
  input  logic         fault_on,
  input  int           fault_row,
  input  int           fault_col,
  input  int           fault_site,
  input  logic         fault_val,
  output logic [N-1:0] co,
  output logic [N-1:0] po,
  output logic [N-1:0] xo,
  output logic [N-1:0] yo
);
  localparam int NUM_SITES = 20;

  typedef struct packed {
    logic [N-1:0] co, po, xo, yo;
  } resp_t;

  function automatic resp_t eval(logic tm, logic [N-1:0] x, logic [N-1:0] y,
                                 logic [N-1:0] ci, logic [N-1:0] pi,
                                 logic fault_on, int fault_row, int fault_col,
                                 int fault_site, logic fault_val);
    resp_t o;
    logic s  [N][N];
    logic c  [N][N];
    logic xw [N][N];   // x leaving cell (r, j)
    logic yw [N][N];   // y leaving cell (r, j)
    for (int r = 0; r < N; r++) begin
      for (int j = 0; j < N; j++) begin
        logic xin, yin, cin, pin;
        logic v [NUM_SITES];
        bit   here;
        here = fault_on && fault_row == r && fault_col == j;
        xin = (j == 0) ? x[r] : xw[r][j > 0 ? j-1 : 0];
        yin = (r == 0) ? y[j] : yw[r > 0 ? r-1 : 0][j];
        cin = (j == 0) ? ci[r] : c[r][j > 0 ? j-1 : 0];
        if (r == 0)         pin = pi[j];
        else if (j < N - 1) pin = s[r-1][j+1];
        else if (test_mode) pin = s[r-1][0];
        else                pin = c[r-1][N-1];
        // Evaluate the gates in order, replacing the faulty site's value.
        v[0]  = xin;          if (here && fault_site == 0)  v[0]  = fault_val;
        v[1]  = yin;          if (here && fault_site == 1)  v[1]  = fault_val;
        v[2]  = v[0] & v[1];  if (here && fault_site == 2)  v[2]  = fault_val;
        v[3]  = v[2];         if (here && fault_site == 3)  v[3]  = fault_val;
        v[4]  = pin;          if (here && fault_site == 4)  v[4]  = fault_val;
        v[5]  = v[3] ^ v[4];  if (here && fault_site == 5)  v[5]  = fault_val;
        v[6]  = v[5];         if (here && fault_site == 6)  v[6]  = fault_val;
        v[7]  = cin;          if (here && fault_site == 7)  v[7]  = fault_val;
        v[8]  = v[6] ^ v[7];  if (here && fault_site == 8)  v[8]  = fault_val;
        v[9]  = v[2];         if (here && fault_site == 9)  v[9]  = fault_val;
        v[10] = pin;          if (here && fault_site == 10) v[10] = fault_val;
        v[11] = v[9] & v[10]; if (here && fault_site == 11) v[11] = fault_val;
        v[12] = v[5];         if (here && fault_site == 12) v[12] = fault_val;
        v[13] = cin;          if (here && fault_site == 13) v[13] = fault_val;
        v[14] = v[12] & v[13];if (here && fault_site == 14) v[14] = fault_val;
        v[15] = v[11];        if (here && fault_site == 15) v[15] = fault_val;
        v[16] = v[14];        if (here && fault_site == 16) v[16] = fault_val;
        v[17] = v[15] | v[16];if (here && fault_site == 17) v[17] = fault_val;
        v[18] = xin;          if (here && fault_site == 18) v[18] = fault_val;
        v[19] = yin;          if (here && fault_site == 19) v[19] = fault_val;
        s[r][j]  = v[8];
        c[r][j]  = v[17];
        xw[r][j] = v[18];
        yw[r][j] = v[19];
      end
    end
    for (int r = 0; r < N; r++) begin
      o.co[r] = c[r][N-1];
      o.xo[r] = xw[r][N-1];
    end
    for (int j = 0; j < N; j++) begin
      o.po[j] = s[N-1][j];
      o.yo[j] = yw[N-1][j];
    end
    return o;
  endfunction

  always_comb begin
    {co, po, xo, yo} = eval(test_mode, x, y, ci, pi,
                            fault_on, fault_row, fault_col, fault_site, fault_val);
  end
endmodule
