// tb_dmem - self-checking test of the data memory.
// Random mix of core-port writes, load-port writes and reads on both ports
// against a testbench copy; checks that a core write wins over a load-port
// write in the same cycle and that reads are combinational.
module tb_dmem;
  import secured_pkg::*;
  localparam int DEPTH = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] dmab, ld_addr;
  logic       dm_we, ld_we;
  word_t      dmdb_w, dmdb_r, ld_wdata, ld_rdata;
  word_t      model [DEPTH];

  dmem #(.DEPTH(DEPTH)) dut (.clk, .dmab, .dm_we, .dmdb_w, .dmdb_r,
                             .ld_addr, .ld_we, .ld_wdata, .ld_rdata);

  task automatic chk(word_t got, word_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL: %s got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dm_we = 0; ld_we = 0; dmab = 0; ld_addr = 0; dmdb_w = 0; ld_wdata = 0;
    // initialise through the load port
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      ld_we = 1; ld_addr = 8'(i); ld_wdata = $urandom; model[i] = ld_wdata;
    end
    @(negedge clk) ld_we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      dmab = 8'($urandom); ld_addr = ($urandom % 4 == 0) ? dmab : 8'($urandom);
      dm_we = $urandom % 3 == 0; ld_we = $urandom % 3 == 0;
      dmdb_w = $urandom; ld_wdata = $urandom;
      #1;
      chk(dmdb_r, model[dmab], "core read");
      chk(ld_rdata, model[ld_addr], "load-port read");
      @(posedge clk);
      if (dm_we) model[dmab] = dmdb_w;
      else if (ld_we) model[ld_addr] = ld_wdata;
    end
    @(negedge clk) begin dm_we = 0; ld_we = 0; end
    for (int i = 0; i < DEPTH; i++) begin
      ld_addr = 8'(i); #1 chk(ld_rdata, model[i], "final contents");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
