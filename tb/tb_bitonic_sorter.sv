// tb_bitonic_sorter: self-checking test of the 32-way bitonic sorter.
// Applies random key vectors (with many repeated keys) and compares the output
// with a reference sort of the same keys.
module tb_bitonic_sorter;
  localparam int unsigned N = 32;
  localparam int unsigned KEY_W = 12;
  logic [N-1:0][KEY_W-1:0] in_keys, out_keys;
  bitonic_sorter #(.N(N), .KEY_W(KEY_W)) dut (.in_keys, .out_keys);

  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 500; t++) begin
      int r [N];
      for (int i = 0; i < int'(N); i++) begin
        in_keys[i] = (t % 2 == 0) ? KEY_W'($urandom) : KEY_W'($urandom_range(7));
        r[i] = int'(in_keys[i]);
      end
      r.sort();
      #1;
      for (int i = 0; i < int'(N); i++) begin
        checks++;
        if (int'(out_keys[i]) != r[i]) begin
          failures++;
          if (failures < 10) $display("FAIL: vector %0d position %0d: %0d vs %0d", t, i, out_keys[i], r[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
