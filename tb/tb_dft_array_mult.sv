// Self-checking test of dft_array_mult at N = 16 (default), N = 4 and N = 64.
//
// Normal mode: random and corner-case operands, p compared with x * y.
// Test mode: the five vectors of Table II expanded over the array, co and po
// compared with the table's responses and with the reference model, and the
// cell test patterns the reference model sees inside the array checked: in every vector each
// cell sees one of the five patterns (xy, cin, pin) = 001, 010, 011, 100,
// 101, and over the five vectors each cell sees all five. Random stimuli in
// both modes are compared with the reference model, which exercises the
// left-border multiplexers in both positions.
module tb_dft_array_mult;
  import mult_ref_pkg::*;

  localparam int N  = 16;
  localparam int NS = 4;
  localparam int NL = 64;

  logic           tm;
  logic [N-1:0]   x, y, ci, pi, co, po, xo, yo;
  logic [2*N-1:0] p;
  logic [NS-1:0]  xs, ys, cis, pis, cos, pos, xos, yos;
  logic [2*NS-1:0] ps;
  logic [NL-1:0]  xl, yl, cil, pil, col, pol, xol, yol;
  logic [2*NL-1:0] pl;

  int checks = 0, failures = 0;

  dft_array_mult dut (.test_mode(tm), .x(x), .y(y), .ci(ci), .pi(pi),
                      .p(p), .co(co), .po(po), .xo(xo), .yo(yo));
  dft_array_mult #(.N(NS)) dut_s (.test_mode(tm), .x(xs), .y(ys), .ci(cis), .pi(pis),
                      .p(ps), .co(cos), .po(pos), .xo(xos), .yo(yos));
  dft_array_mult #(.N(NL)) dut_l (.test_mode(tm), .x(xl), .y(yl), .ci(cil), .pi(pil),
                      .p(pl), .co(col), .po(pol), .xo(xol), .yo(yol));

  function automatic logic [63:0] rand64();
    return {$urandom(), $urandom()};
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic apply_random(bit mode);
    ref_out_t e, es, el;
    tm = mode;
    xl = rand64(); yl = rand64();
    cil = mode ? rand64() : '0;
    pil = mode ? rand64() : '0;
    x  = N'($urandom()); y  = N'($urandom());
    ci = mode ? N'($urandom()) : '0;
    pi = mode ? N'($urandom()) : '0;
    xs = NS'($urandom()); ys = NS'($urandom());
    cis = mode ? NS'($urandom()) : '0;
    pis = mode ? NS'($urandom()) : '0;
    #1;
    e  = ref_array(N,  mode, MAXN'(x),  MAXN'(y),  MAXN'(ci),  MAXN'(pi));
    es = ref_array(NS, mode, MAXN'(xs), MAXN'(ys), MAXN'(cis), MAXN'(pis));
    el = ref_array(NL, mode, xl, yl, cil, pil);
    if (!mode) begin
      check(pl == (2*NL)'(xl) * (2*NL)'(yl), $sformatf("64-bit product %h * %h = %h", xl, yl, pl));
      check(p == (2*N)'(x) * (2*N)'(y), $sformatf("product %h * %h = %h", x, y, p));
      check(ps == (2*NS)'(xs) * (2*NS)'(ys), $sformatf("small product %h * %h = %h", xs, ys, ps));
    end
    check(co == e.co[N-1:0] && po == e.po[N-1:0], "co/po vs model");
    check(cos == es.co[NS-1:0] && pos == es.po[NS-1:0], "small co/po vs model");
    check(col == el.co && pol == el.po, "64-bit co/po vs model");
    check(xo == x && yo == y && xos == xs && yos == ys, "pass-through");
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] fx, fy, fci, fpi, fco, fpo;
    bit seen [N][N][8];
    foreach (seen[r, j, k]) seen[r][j][k] = 0;

    // Corner cases of normal mode.
    tm = 0; ci = '0; pi = '0; cis = '0; pis = '0;
    cil = '0; pil = '0;
    x = '1; y = '1; xs = '1; ys = '1; xl = '1; yl = '1; #1;
    check(pl == (2*NL)'(xl) * (2*NL)'(yl), "all ones 64-bit product");
    check(p == (2*N)'(x) * (2*N)'(y), "all ones product");
    check(ps == (2*NS)'(xs) * (2*NS)'(ys), "all ones small product");

    for (int k = 0; k < 400; k++) apply_random(0);

    // The five test vectors.
    tm = 1;
    for (int v = 0; v < 5; v++) begin
      ref_out_t e;
      {fx, fy, fci, fpi, fco, fpo} = TABLE2[v];
      x = N'(rep2(fx)); y = N'(rep2(fy)); ci = N'(rep2(fci)); pi = N'(rep2(fpi));
      xs = NS'(rep2(fx)); ys = NS'(rep2(fy)); cis = NS'(rep2(fci)); pis = NS'(rep2(fpi));
      xl = rep2(fx); yl = rep2(fy); cil = rep2(fci); pil = rep2(fpi);
      #1;
      e = ref_array(N, 1, MAXN'(x), MAXN'(y), MAXN'(ci), MAXN'(pi));
      check(co == N'(rep2(fco)), $sformatf("vector %0d co %h", v, co));
      check(po == N'(rep2(fpo)), $sformatf("vector %0d po %h", v, po));
      check(cos == NS'(rep2(fco)) && pos == NS'(rep2(fpo)), $sformatf("vector %0d small", v));
      check(col == rep2(fco) && pol == rep2(fpo), $sformatf("vector %0d 64-bit", v));
      check(co == e.co[N-1:0] && po == e.po[N-1:0], $sformatf("vector %0d vs model", v));
      for (int r = 0; r < N; r++)
        for (int j = 0; j < N; j++) begin
          checks++;
          if (!(e.pat[r][j] inside {3'b001, 3'b010, 3'b011, 3'b100, 3'b101})) begin
            failures++;
            $display("FAIL vector %0d cell (%0d,%0d) sees pattern %b", v, r, j, e.pat[r][j]);
          end
          seen[r][j][e.pat[r][j]] = 1;
        end
    end
    for (int r = 0; r < N; r++)
      for (int j = 0; j < N; j++)
        check(seen[r][j][1] && seen[r][j][2] && seen[r][j][3] && seen[r][j][4] && seen[r][j][5],
              $sformatf("cell (%0d,%0d) saw all five patterns", r, j));

    for (int k = 0; k < 400; k++) apply_random(1);
    for (int k = 0; k < 100; k++) apply_random(0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
