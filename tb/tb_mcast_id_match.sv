// tb_mcast_id_match: exhaustive test of the multi-ID multicast comparator.
// For random ID sets and enables every 5-bit tag is compared against an
// independent membership test.
module tb_mcast_id_match;
  logic [4:0] tag;
  logic [4:0] ids [5];
  logic       id_en [5];
  logic       hit;
  int checks = 0, failures = 0;

  mcast_id_match #(.NUM_IDS(5), .ID_W(5)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 200; trial++) begin
      for (int k = 0; k < 5; k++) begin
        ids[k]   = 5'($urandom);
        id_en[k] = (trial == 0) ? 1'b0 : (($urandom % 4) != 0);
      end
      for (int t = 0; t < 32; t++) begin
        bit exp;
        exp = 0;
        tag = 5'(t);
        #1;
        foreach (ids[k]) if (id_en[k] && ids[k] == 5'(t)) exp = 1;
        checks++;
        if (hit !== exp) begin
          failures++;
          $display("FAIL: trial %0d tag %0d hit=%0b expected %0b", trial, t, hit, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
