// tb_me_tree -- self-checking test of the Merge tree (8 leaves).
// Every cycle a random neuron index is placed on a random subset of leaves
// with small random currents (the others carry the invalid index), or all
// leaves carry the end index, or none is active. The root must deliver, after
// exactly log2(M) = 3 cycles, the index with the sum of the currents.
`timescale 1ns/1ps
module tb_me_tree;
  import supra_pkg::*;
  localparam int M = 8, W_LI = 7, W_M = 5, LAT = 3;
  localparam logic [W_LI-1:0] INV = 7'd126, ENDI = 7'd127;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [M-1:0][W_LI-1:0] leaf_idx;
  logic [M-1:0][W_M-1:0]  leaf_cur;
  logic [W_LI-1:0] root_idx;
  logic [W_M-1:0]  root_cur;
  me_tree #(.M(M), .W_LI(W_LI), .W_M(W_M)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  int exp_idx [$], exp_cur [$];
  int merges = 0;
  initial begin
    for (int j = 0; j < M; j++) begin leaf_idx[j] = INV; leaf_cur[j] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < LAT; k++) begin exp_idx.push_back(INV); exp_cur.push_back(0); end
    for (int i = 0; i < 3000; i++) begin
      int r, sum, nact;
      logic [W_LI-1:0] ni;
      @(negedge clk);
      // packet leaving the root now was entered LAT cycles ago
      begin
        int ei, ec;
        ei = exp_idx.pop_front(); ec = exp_cur.pop_front();
        check(int'(root_idx) == ei && (ei >= 126 || int'($signed(root_cur)) == ec),
              $sformatf("cycle %0d: root %0d/%0d expected %0d/%0d", i, root_idx, $signed(root_cur), ei, ec));
      end
      r = $urandom % 8;
      ni = W_LI'($urandom % 126);
      sum = 0; nact = 0;
      for (int j = 0; j < M; j++) begin
        leaf_idx[j] = INV; leaf_cur[j] = W_M'($urandom);   // currents of invalid packets are ignored
        if (r < 6 && ($urandom % 2)) begin
          int c;
          c = int'($urandom % 3) - 1;
          leaf_idx[j] = ni; leaf_cur[j] = W_M'(c); sum += c; nact++;
        end else if (r == 6) leaf_idx[j] = ENDI;
      end
      if (nact > 1) merges++;
      exp_idx.push_back(r == 6 ? int'(ENDI) : (nact > 0 ? int'(ni) : int'(INV)));
      exp_cur.push_back(sum);
    end
    check(merges > 0, "currents of several leaves merged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
