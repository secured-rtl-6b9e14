// tb_reg_stack - self-checking test of the context stack.
// Pushes two full 37-word contexts, checks full, refused overflow and the
// error flag, pops them back in reverse order, checks empty and refused
// underflow, then runs random push/pop traffic against a queue model.
module tb_reg_stack;
  import secured_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, pop, empty, full, err;
  word_t wdata, rdata;
  logic [6:0] count;
  word_t q [$];

  reg_stack #(.FRAMES(2)) dut (.clk, .rst_n, .push, .pop, .wdata, .rdata,
                               .count, .empty, .full, .err);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic op(bit pu, bit po, word_t d);
    @(negedge clk); push = pu; pop = po; wdata = d;
    @(negedge clk); push = 0; pop = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(empty && count == 0 && !err, "empty after reset");
    for (int i = 0; i < 2 * NSAVE; i++) begin
      word_t d = $urandom;
      op(1, 0, d); q.push_back(d);
      chk(rdata == d, "top is last push");
    end
    chk(full && count == 7'(2 * NSAVE), "full after two contexts");
    op(1, 0, 32'hdead_beef);
    chk(count == 7'(2 * NSAVE) && err, "overflow refused and flagged");
    chk(rdata == q[$], "top unchanged by refused push");
    for (int i = 0; i < 2 * NSAVE; i++) begin
      chk(rdata == q[$], $sformatf("pop order %0d", i));
      void'(q.pop_back());
      op(0, 1, 0);
    end
    chk(empty && count == 0, "empty after popping all");
    // reset clears the error flag; underflow sets it again
    rst_n = 0; #1 rst_n = 1;
    chk(!err, "error cleared by reset");
    op(0, 1, 0);
    chk(err && count == 0, "underflow refused and flagged");
    rst_n = 0; #1 rst_n = 1;
    // random traffic, including simultaneous push and pop
    for (int n = 0; n < 2000; n++) begin
      bit pu = $urandom % 2, po = $urandom % 2;
      word_t d = $urandom;
      if (q.size() == 0) po = 0;
      if (q.size() == 2 * NSAVE && !po) pu = 0;
      op(pu, po, d);
      if (pu && po) q[$] = d;
      else if (pu) q.push_back(d);
      else if (po) void'(q.pop_back());
      chk(count == 7'(q.size()), "count matches model");
      if (q.size() > 0) chk(rdata == q[$], "top matches model");
    end
    chk(!err, "no error in legal traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
