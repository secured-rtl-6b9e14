// tb_imem - self-checking test of the instruction memory.
// Loads random instructions at random addresses through the load port and
// reads them back through the fetch port, comparing with a testbench copy;
// also checks that the read is combinational (same cycle as the address).
module tb_imem;
  import secured_pkg::*;
  localparam int DEPTH = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [9:0] imab, ld_addr;
  instr_t     imdb, ld_data;
  logic       ld_we;
  instr_t     model [int];

  imem #(.DEPTH(DEPTH)) dut (.clk, .imab, .imdb, .ld_we, .ld_addr, .ld_data);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_we = 0; ld_addr = 0; ld_data = 0; imab = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      ld_we = 1; ld_addr = 10'($urandom); ld_data = {$urandom, $urandom};
      model[int'(ld_addr)] = ld_data;
    end
    @(negedge clk) ld_we = 0;
    foreach (model[a]) begin
      imab = 10'(a);
      #1;
      checks++;
      if (imdb !== model[a]) begin
        failures++;
        $display("FAIL: addr %0d read %h expected %h", a, imdb, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
