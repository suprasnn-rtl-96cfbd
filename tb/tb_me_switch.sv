// tb_me_switch -- self-checking test of one Merge-tree node.
// Drives every legal input combination at random (same neuron on both sides,
// one side invalid, both end, both invalid) and checks, one cycle later, the
// registered packet against an independently computed result, including
// the saturation of the 5-bit sum.
`timescale 1ns/1ps
module tb_me_switch;
  import supra_pkg::*;
  localparam int W_LI = 7, W_M = 5;
  localparam logic [W_LI-1:0] INV = 7'd126, ENDI = 7'd127;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W_LI-1:0] l_idx = INV, r_idx = INV, o_idx;
  logic [W_M-1:0]  l_cur = '0, r_cur = '0, o_cur;
  me_switch #(.W_LI(W_LI), .W_M(W_M)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic int sx(logic [W_M-1:0] v); return int'($signed(v)); endfunction
  int n_add = 0, n_sat = 0, n_pass = 0, n_end = 0;
  initial begin
    repeat (2) @(posedge clk);
    check(o_idx == INV && o_cur == 0, "reset value is an invalid packet");
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      logic [W_LI-1:0] ei;
      int ec, kind;
      @(negedge clk);
      l_cur = W_M'($urandom); r_cur = W_M'($urandom);
      kind = $urandom % 5;
      case (kind)
        0, 1: begin l_idx = W_LI'($urandom % 126); r_idx = l_idx; end
        2: begin l_idx = W_LI'($urandom % 126); r_idx = INV; end
        3: begin l_idx = INV; r_idx = W_LI'($urandom % 126); end
        default: if ($urandom % 2) begin l_idx = ENDI; r_idx = ENDI; end
                 else begin l_idx = INV; r_idx = INV; end
      endcase
      if (l_idx == r_idx && l_idx < 126) begin
        ec = sx(l_cur) + sx(r_cur);
        if (ec > 15 || ec < -16) n_sat++;
        ec = ec > 15 ? 15 : (ec < -16 ? -16 : ec);
        ei = l_idx; n_add++;
      end else if (l_idx < 126) begin ei = l_idx; ec = sx(l_cur); n_pass++; end
      else if (r_idx < 126) begin ei = r_idx; ec = sx(r_cur); n_pass++; end
      else if (l_idx == ENDI) begin ei = ENDI; ec = sx(l_cur); n_end++; end
      else begin ei = INV; ec = 0; end
      @(posedge clk); #1;
      check(o_idx == ei && (ei == ENDI || sx(o_cur) == ec),
            $sformatf("in l=%0d/%0d r=%0d/%0d: out %0d/%0d expected %0d/%0d",
                      l_idx, sx(l_cur), r_idx, sx(r_cur), o_idx, sx(o_cur), ei, ec));
    end
    check(n_add > 0 && n_sat > 0 && n_pass > 0 && n_end > 0, "all cases exercised");
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
