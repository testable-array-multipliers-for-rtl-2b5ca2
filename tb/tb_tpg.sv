// Self-checking test of tpg at N = 16 (default) and N = 6.
//
// For every counter value 0..4: each expanded output bit i must equal the
// decoder field bit i % 2, the golden xo/yo must equal the x/y applied, and
// the golden co/po must be what the reference array model computes for the
// applied stimulus in test mode.
module tb_tpg;
  import mult_ref_pkg::*;

  localparam int N  = 16;
  localparam int NS = 6;

  logic [2:0] idx;
  logic [N-1:0]  x, y, ci, pi, gco, gpo, gxo, gyo;
  logic [NS-1:0] xs, ys, cis, pis, gcos, gpos, gxos, gyos;
  int checks = 0, failures = 0;

  tpg dut (.idx(idx), .x(x), .y(y), .ci(ci), .pi(pi),
           .gold_co(gco), .gold_po(gpo), .gold_xo(gxo), .gold_yo(gyo));
  tpg #(.N(NS)) dut_s (.idx(idx), .x(xs), .y(ys), .ci(cis), .pi(pis),
           .gold_co(gcos), .gold_po(gpos), .gold_xo(gxos), .gold_yo(gyos));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 5; v++) begin
      ref_out_t e, es;
      logic [1:0] fx, fy, fci, fpi, fco, fpo;
      {fx, fy, fci, fpi, fco, fpo} = TABLE2[v];
      idx = 3'(v);
      #1;
      for (int i = 0; i < N; i++)
        check(x[i] == fx[i % 2] && y[i] == fy[i % 2] && ci[i] == fci[i % 2] && pi[i] == fpi[i % 2],
              $sformatf("vector %0d stimulus bit %0d", v, i));
      check(gxo == x && gyo == y && gxos == xs && gyos == ys, $sformatf("vector %0d golden xo/yo", v));
      e  = ref_array(N,  1, MAXN'(x),  MAXN'(y),  MAXN'(ci),  MAXN'(pi));
      es = ref_array(NS, 1, MAXN'(xs), MAXN'(ys), MAXN'(cis), MAXN'(pis));
      check(gco == e.co[N-1:0] && gpo == e.po[N-1:0], $sformatf("vector %0d golden co/po", v));
      check(gcos == es.co[NS-1:0] && gpos == es.po[NS-1:0], $sformatf("vector %0d small golden co/po", v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
