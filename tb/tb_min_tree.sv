// tb_min_tree: random vectors (with many ties) for a 64-input and a
// non-power-of-two 5-input tree; checks the minimum and that the index is
// the first position holding it.
module tb_min_tree;
  logic [15:0] v64 [64];
  logic [15:0] v5  [5];
  logic [15:0] m64, m5;
  logic [5:0]  i64;
  logic [2:0]  i5;
  int checks = 0, failures = 0;
  min_tree #(.N(64), .WIDTH(16)) dut64 (.vals(v64), .min_val(m64), .min_idx(i64));
  min_tree #(.N(5),  .WIDTH(16)) dut5  (.vals(v5),  .min_val(m5),  .min_idx(i5));

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int em, ei;
      automatic int lim = (n % 2 != 0) ? 8 : 65536;
      for (int i = 0; i < 64; i++) v64[i] = 16'($urandom % lim);
      for (int i = 0; i < 5; i++)  v5[i]  = (n % 5 == 0) ? 16'hffff : 16'($urandom % lim);
      #1;
      em = 1 << 20; ei = 0;
      for (int i = 0; i < 64; i++) if (v64[i] < em) begin em = v64[i]; ei = i; end
      checks++;
      if (int'(m64) != em || int'(i64) != ei) begin
        failures++;
        $display("N=64: got %0d@%0d expected %0d@%0d", m64, i64, em, ei);
      end
      em = 1 << 20; ei = 0;
      for (int i = 0; i < 5; i++) if (v5[i] < em) begin em = v5[i]; ei = i; end
      checks++;
      if (int'(m5) != em || int'(i5) != ei) begin
        failures++;
        $display("N=5: got %0d@%0d expected %0d@%0d", m5, i5, em, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
