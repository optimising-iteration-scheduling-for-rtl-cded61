// pair_index_gen_tb: for every target t of a 6-qubit register, enumerates the
// pairs by brute force (all k with bit t clear, ascending) and checks that
// iteration i maps to the i-th such k and to k + 2^t. Also checks the 3-qubit
// t = 1 pairs (0,2) (1,3) (4,6) (5,7) and a few wide indices at t = 31.
module pair_index_gen_tb;
  import qsim_pkg::*;

  logic [31:0] idx, pe0, pe1;
  qidx_t       target;
  int checks = 0, failures = 0;

  pair_index_gen #(.IDX_W(32)) dut (.idx, .target, .pe0, .pe1);

  task automatic check(input logic [31:0] e0, input logic [31:0] e1);
    #1;
    checks++;
    if (pe0 !== e0 || pe1 !== e1) begin
      failures++;
      if (failures < 10)
        $display("FAIL i=%0d t=%0d: got (%0d,%0d) expected (%0d,%0d)", idx, target, pe0, pe1, e0, e1);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned i;
    for (int t = 0; t < 6; t++) begin
      i = 0;
      for (int k = 0; k < 64; k++) begin
        if (((k >> t) & 1) == 0) begin
          idx = i; target = qidx_t'(t);
          check(k, k + (1 << t));
          i++;
        end
      end
    end
    target = 1;
    idx = 0; check(0, 2);
    idx = 1; check(1, 3);
    idx = 2; check(4, 6);
    idx = 3; check(5, 7);
    target = 31;
    idx = 32'h1234_5678; check(32'h1234_5678, 32'h9234_5678);
    target = 4;
    idx = 32'h0fff_ffff; check(32'h1fff_ffef, 32'h1fff_ffff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
