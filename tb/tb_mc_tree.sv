// tb_mc_tree -- self-checking test of the Multi-Cast tree (8 leaves).
// A random packet with a random routing bitstring enters the root every
// cycle. After exactly log2(M) = 3 cycles each leaf j must carry the
// packet's ctrl and index if bit M-1-j of the bitstring is set, and an
// invalid ctrl otherwise.
`timescale 1ns/1ps
module tb_mc_tree;
  import supra_pkg::*;
  localparam int M = 8, IDX_W = 10, LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mc_ctrl_e root_ctrl = CTRL_INVALID;
  logic [IDX_W-1:0] root_idx = '0;
  logic [M-1:0] root_bs = '0;
  mc_ctrl_e leaf_ctrl [M];
  logic [M-1:0][IDX_W-1:0] leaf_idx;
  mc_tree #(.M(M), .IDX_W(IDX_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  mc_ctrl_e q_ctrl [$];
  logic [IDX_W-1:0] q_idx [$];
  logic [M-1:0] q_bs [$];
  int delivered = 0, filtered = 0;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < LAT; k++) begin q_ctrl.push_back(CTRL_INVALID); q_idx.push_back('0); q_bs.push_back('0); end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      begin
        mc_ctrl_e c;
        logic [IDX_W-1:0] x;
        logic [M-1:0] b;
        c = q_ctrl.pop_front(); x = q_idx.pop_front(); b = q_bs.pop_front();
        for (int j = 0; j < M; j++) begin
          if (b[M-1-j] && c != CTRL_INVALID) begin
            check(leaf_ctrl[j] == c && leaf_idx[j] == x,
                  $sformatf("cycle %0d leaf %0d: %0d/%0d expected %0d/%0d", i, j, leaf_ctrl[j], leaf_idx[j], c, x));
            delivered++;
          end else begin
            check(leaf_ctrl[j] == CTRL_INVALID, $sformatf("cycle %0d leaf %0d: packet not addressed to it", i, j));
            filtered++;
          end
        end
      end
      root_ctrl = mc_ctrl_e'($urandom % 4);
      root_idx  = IDX_W'($urandom);
      root_bs   = ($urandom % 4 == 0) ? '1 : M'($urandom);
      q_ctrl.push_back(root_ctrl); q_idx.push_back(root_idx); q_bs.push_back(root_bs);
    end
    check(delivered > 0 && filtered > 0, "packets were delivered and filtered");
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
