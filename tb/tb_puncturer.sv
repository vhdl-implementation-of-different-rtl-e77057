// tb_puncturer: random parity pairs, with gaps in `valid` and a clear in the middle; the
// output must be par_1 on even and par_2 on odd positions of the block.
module tb_puncturer;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clear, valid, par1, par2, par, sel;
  int   checks = 0, failures = 0;
  int   pos;

  always #5 clk = ~clk;

  puncturer dut (.clk, .rst_n, .clear, .valid, .par1, .par2, .par, .sel_par2(sel));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 1'b0; valid = 1'b0; par1 = 1'b0; par2 = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    pos = 0;
    for (int c = 0; c < 400; c++) begin
      clear = (c == 150);
      valid = !clear && ($urandom_range(3) != 0);
      par1  = logic'($urandom_range(1));
      par2  = logic'($urandom_range(1));
      if (clear) pos = 0;
      #1;
      if (valid) begin
        checks++;
        if (par !== ((pos % 2 == 0) ? par1 : par2) || sel !== logic'(pos % 2)) begin
          failures++;
          $display("pos %0d: par=%b p1=%b p2=%b", pos, par, par1, par2);
        end
        pos++;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
