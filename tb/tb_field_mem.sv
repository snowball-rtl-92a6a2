// tb_field_mem: self-checking test of the word-organised field memory.
// Writes random words with random lane masks against a reference array and
// checks both read ports, including that masked-off lanes keep their value
// and that a write becomes visible on the next cycle.
module tb_field_mem;
  import snowball_pkg::*;
  localparam int N_MAX = 512, LANES = 64, W_MAX = N_MAX / LANES;
  logic clk = 0, wr_en = 0;
  logic [2:0] rd_addr, wr_addr, rb_addr;
  logic [LANES-1:0] wr_mask;
  logic [LANES-1:0][FIELD_W-1:0] rd_data, wr_data, rb_data;
  logic [LANES-1:0][FIELD_W-1:0] ref_mem [W_MAX];
  int checks = 0, failures = 0;

  field_mem #(.N_MAX(N_MAX), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_addr = '0; rb_addr = '0; wr_addr = '0; wr_mask = '0; wr_data = '0;
    // initialise every word fully
    for (int w = 0; w < W_MAX; w++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 3'(w); wr_mask = '1;
      for (int l = 0; l < LANES; l++) wr_data[l] = $urandom;
      ref_mem[w] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int it = 0; it < 300; it++) begin
      wr_en = 1; wr_addr = 3'($urandom_range(0, W_MAX - 1));
      wr_mask = {$urandom, $urandom};
      for (int l = 0; l < LANES; l++) wr_data[l] = $urandom;
      rd_addr = wr_addr; #1;
      check(rd_data == ref_mem[wr_addr], "read before write returns old word");
      @(negedge clk);
      for (int l = 0; l < LANES; l++) if (wr_mask[l]) ref_mem[wr_addr][l] = wr_data[l];
      wr_en = 0;
      rd_addr = 3'($urandom_range(0, W_MAX - 1));
      rb_addr = 3'($urandom_range(0, W_MAX - 1)); #1;
      check(rd_data == ref_mem[rd_addr], $sformatf("port A word %0d", rd_addr));
      check(rb_data == ref_mem[rb_addr], $sformatf("port B word %0d", rb_addr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
