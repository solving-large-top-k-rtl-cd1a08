// tb_plram_buffer: random writes and reads over the 70-word default depth.
// Checks every read against a model one cycle after the address (the read
// latency), that a same-cycle write and read return the old value, and
// that out-of-range reads return zero.
module tb_plram_buffer;
  import eig_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 3 * 24 - 2;

  logic wr_valid; logic [7:0] wr_addr, rd_addr; fx_t wr_data, rd_data;
  plram_buffer dut (.clk, .wr_valid, .wr_addr, .wr_data, .rd_addr, .rd_data);

  fx_t model [D];
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wr_valid = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); wr_valid = 1; wr_addr = 8'(i); wr_data = fx_t'($urandom); model[i] = wr_data;
    end
    @(negedge clk); wr_valid = 0;
    for (int t = 0; t < 2000; t++) begin
      automatic int a = $urandom % (D + 4);
      automatic fx_t exp_v = (a < D) ? model[a] : '0;
      @(negedge clk);
      rd_addr = 8'(a);
      wr_valid = ($urandom % 2) == 0; wr_addr = 8'($urandom % D); wr_data = fx_t'($urandom);
      if ($urandom % 8 == 0 && a < D) wr_addr = 8'(a);   // same-cycle write: old value expected
      @(posedge clk); #1;
      checks++; if (rd_data != exp_v) begin failures++; $display("addr %0d: %h vs %h", a, rd_data, exp_v); end
      if (wr_valid) model[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
