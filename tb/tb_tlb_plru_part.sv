// tb_tlb_plru_part: checks the constrained tree-PLRU victim choice.
// A reference model of the tree (kept in the testbench) predicts every
// victim; independent properties are also checked: the victim is always an
// allowed entry, touching all entries in order makes entry 0 the victim,
// an invalid allowed entry is preferred, and with a one-partition mask every
// fill stays inside that partition.
module tb_tlb_plru_part;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] allowed, valid;
  logic access;
  logic [3:0] access_idx, repl_idx;
  logic repl_valid;
  int checks = 0, failures = 0;

  tlb_plru_part #(.ENTRIES(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .allowed_i(allowed), .valid_i(valid),
    .access_i(access), .access_idx_i(access_idx), .repl_idx_o(repl_idx), .repl_valid_o(repl_valid));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit tree [N-1];
  function automatic int model_pick(logic [N-1:0] al, logic [N-1:0] vl);
    int p = 0;
    for (int e = 0; e < N; e++) if (al[e] && !vl[e]) return e;
    for (int l = 0; l < 4; l++) begin
      int span = N >> (l + 1);
      bit lany = 0, rany = 0, d;
      for (int e = 0; e < span; e++) begin
        lany |= al[2*p*span + e];
        rany |= al[(2*p+1)*span + e];
      end
      d = tree[(1 << l) - 1 + p];
      if (d && !rany) d = 0; else if (!d && !lany) d = 1;
      p = 2 * p + d;
    end
    return p;
  endfunction
  function automatic void model_touch(int idx);
    for (int l = 0; l < 4; l++) tree[(1 << l) - 1 + (idx >> (4 - l))] = !idx[3-l];
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic touch(int idx);
    access = 1; access_idx = 4'(idx);
    @(posedge clk); #1;
    access = 0;
    model_touch(idx);
  endtask

  initial begin
    access = 0; access_idx = 0; allowed = '1; valid = '0;
    foreach (tree[i]) tree[i] = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1; #1;
    // invalid entries first
    check(repl_idx == 0 && repl_valid, "empty TLB picks entry 0");
    valid = 16'h00ff; #1;
    check(repl_idx == 8, "lowest invalid allowed entry");
    allowed = 16'h0f0f; valid = 16'h00ff; #1;
    check(repl_idx == 8, "invalid inside allowed set");
    allowed = 16'h000f; #1;
    check(repl_idx inside {[0:3]}, "partition 0 only");
    allowed = '0; #1;
    check(!repl_valid, "no partition enabled -> no victim");
    // true LRU order for a sequential sweep
    allowed = '1; valid = '1;
    for (int i = 0; i < N; i++) touch(i);
    #1 check(repl_idx == 0, "after touching 0..15 the victim is 0");
    touch(0);
    #1 check(repl_idx == 8, "after touching 0 again the victim is 8");
    // random masks against the model
    for (int t = 0; t < 2000; t++) begin
      allowed = N'($urandom);
      valid   = ($urandom % 4 == 0) ? N'($urandom) : '1;
      #1;
      if (allowed != 0) begin
        check(allowed[repl_idx], "victim is allowed");
        check(int'(repl_idx) == model_pick(allowed, valid), "victim matches model");
      end
      touch($urandom % N);
    end
    // partition isolation: fills stay in partition 2
    allowed = 16'h0f00; valid = '1;
    for (int t = 0; t < 50; t++) begin
      #1 check(repl_idx inside {[8:11]}, "fill stays in partition 2");
      touch(int'(repl_idx));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
