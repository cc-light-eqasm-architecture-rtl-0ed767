// tb_pair_mask_decoder -- self-checking test of the two-qubit mask expansion.
// Reference: the sixteen directed pairs (source, target) of the seven-qubit
// chip, written out here independently of the design's table.
//
// Combinational: every single-bit mask, random multi-bit masks and masks with
// a qubit used twice are applied and the source/target/conflict outputs are
// checked one time unit later.  The pair numbering is the one drawn for the
// seven-qubit chip; the conflict output is this design's addition.
module tb_pair_mask_decoder;
  logic [15:0] mask;
  logic [6:0] src, tgt;
  logic conflict;
  int checks = 0, failures = 0;
  int ps [16] = '{2, 0, 3, 1, 2, 5, 3, 6, 0, 3, 1, 4, 5, 3, 6, 4};
  int pt [16] = '{0, 3, 1, 4, 5, 3, 6, 4, 2, 0, 3, 1, 2, 5, 3, 6};

  pair_mask_decoder dut (.*);

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < 16; p++) begin
      mask = 16'(1) << p; #1;
      checks++; if (src !== 7'(1 << ps[p]) || tgt !== 7'(1 << pt[p]) || conflict)
        begin failures++; $display("pair %0d src %b tgt %b", p, src, tgt); end
    end
    for (int n = 0; n < 300; n++) begin
      logic [6:0] es, et;
      int used [7];
      logic ec;
      mask = 16'($urandom); if (n == 0) mask = '0;
      es = 0; et = 0; ec = 0;
      foreach (used[i]) used[i] = 0;
      for (int p = 0; p < 16; p++) if (mask[p]) begin
        es[ps[p]] = 1; et[pt[p]] = 1; used[ps[p]]++; used[pt[p]]++;
      end
      foreach (used[i]) if (used[i] > 1) ec = 1;
      #1;
      checks++; if (src !== es || tgt !== et || conflict !== ec) begin failures++; $display("mask %h", mask); end
    end
    // a valid parallel set: pairs 0 (2->0), 2 (3->1), 7 (6->4) share no qubit
    mask = 16'b0000_0000_1000_0101; #1;
    checks++; if (conflict || src !== 7'b1001100 || tgt !== 7'b0010011) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
