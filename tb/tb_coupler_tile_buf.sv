// tb_coupler_tile_buf: self-checking test of the coupler line buffer.
// Streams a line of random words for several plane counts and line lengths,
// with gaps in the stream, and checks: full rises exactly after
// 2 * n_planes * n_words accepted words, every (plane, sign, word) reads back
// as streamed, planes at or above n_planes read as zero, and clear restarts
// the fill.
module tb_coupler_tile_buf;
  import snowball_pkg::*;
  localparam int N_MAX = 512, LANES = 64, B_MAX = 4;
  localparam int W_MAX = N_MAX / LANES;
  logic clk = 0, rst_n = 0, clear = 0, wr_valid = 0, full;
  logic [3:0] n_words;
  logic [2:0] n_planes;
  logic [LANES-1:0] wr_data;
  logic [2:0] rd_word;
  logic [B_MAX-1:0][LANES-1:0] rd_pos, rd_neg;
  logic [LANES-1:0] ref_mem [B_MAX][2][W_MAX];
  int checks = 0, failures = 0;

  coupler_tile_buf #(.N_MAX(N_MAX), .LANES(LANES), .B_MAX(B_MAX)) dut (.*);

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

  task automatic fill_and_check(input int nw, input int np);
    int sent;
    n_words = 4'(nw); n_planes = 3'(np);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    check(!full, "not full after clear");
    sent = 0;
    for (int b = 0; b < np; b++)
      for (int s = 0; s < 2; s++)
        for (int w = 0; w < nw; w++) begin
          while ($urandom_range(0, 3) == 0) begin
            wr_valid = 0; @(negedge clk);
          end
          wr_valid = 1;
          wr_data  = {$urandom, $urandom};
          ref_mem[b][s][w] = wr_data;
          @(negedge clk);
          sent++;
          if (sent < 2 * np * nw) check(!full, $sformatf("full too early after %0d", sent));
        end
    wr_valid = 0;
    check(full, $sformatf("full after %0d words", sent));
    // extra words after full are ignored
    wr_valid = 1; wr_data = '1; @(negedge clk); wr_valid = 0;
    for (int w = 0; w < nw; w++) begin
      rd_word = 3'(w); #1;
      for (int b = 0; b < B_MAX; b++) begin
        if (b < np) begin
          check(rd_pos[b] == ref_mem[b][0][w], $sformatf("pos b=%0d w=%0d", b, w));
          check(rd_neg[b] == ref_mem[b][1][w], $sformatf("neg b=%0d w=%0d", b, w));
        end else begin
          check(rd_pos[b] == '0 && rd_neg[b] == '0, $sformatf("inactive plane %0d zero", b));
        end
      end
    end
  endtask

  initial begin
    wr_data = '0; rd_word = '0; n_words = 4'd8; n_planes = 3'd4;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fill_and_check(8, 4);
    fill_and_check(3, 1);
    fill_and_check(5, 2);
    fill_and_check(1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
