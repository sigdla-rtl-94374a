// tb_sigdla_adder_tree: random signed addends; the tree's sum must equal a sum computed
// here (inputs kept small enough that no wrap occurs).
module tb_sigdla_adder_tree;
  import sigdla_pkg::*;
  logic signed [PSUM_W-1:0] in [N_MUL];
  logic signed [PSUM_W-1:0] sum;
  int checks = 0, failures = 0;

  sigdla_adder_tree dut (.in(in), .sum(sum));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      longint e;
      e = 0;
      for (int m = 0; m < N_MUL; m++) begin
        longint v;
        v = longint'($urandom) - 64'sd2147483648;
        if (t % 3 == 0) v = v >>> 20;
        in[m] = PSUM_W'(v);
        e += v;
      end
      #1;
      checks++;
      if (longint'(sum) != e) begin
        failures++;
        $display("FAIL t=%0d got=%0d exp=%0d", t, sum, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
