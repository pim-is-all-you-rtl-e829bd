// tb_pnm_reduction_tree: drives pnm_accumulator with random small-integer BF16
// lanes (sums stay exact in BF16) and compares every lane with an integer
// reference converted to BF16 independently of the design.
module tb_pnm_reduction_tree;
  import cent_pkg::*;
  slot_t d, s, y;
  int checks = 0, failures = 0;
  int a [16];
  int b [16];

  function automatic bf16_t int2bf(input int v);
    int m, e;
    logic sg;
    if (v == 0) return 16'h0000;
    sg = v < 0;
    m  = sg ? -v : v;
    e  = 0;
    while ((m >> e) > 1) e++;
    return {sg, 8'(127 + e), 7'(((m << 7) >> e) & 8'h7F)};
  endfunction

  pnm_reduction_tree dut (.s(s), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < 16; i++) begin
        a[i] = int'($urandom_range(0, 200)) - 100;
        b[i] = int'($urandom_range(0, 30)) - 15;
        d[i*16 +: 16] = int2bf(a[i]);
        s[i*16 +: 16] = int2bf(b[i]);
      end
      #1;
      begin
        int sum;
        sum = 0;
        for (int i = 0; i < 16; i++) sum += b[i];
        checks++;
        if (y[15:0] !== int2bf(sum)) begin
          failures++;
          if (failures < 5) $display("sum %0d got %h want %h", sum, y[15:0], int2bf(sum));
        end
        checks++;
        if (y[255:16] != '0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
