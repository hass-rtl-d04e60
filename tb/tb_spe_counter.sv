// tb_spe_counter: loads vectors with a random number of zeros, then advances with
// random grant counts; checks count, first and the cycle in which last must rise.
module tb_spe_counter;
  localparam int M = 9, N = 4;
  logic clk = 0, rst_n = 0, load, advance, last, first;
  logic [3:0] load_zeros, count;
  logic [2:0] grants;
  int checks = 0, failures = 0;
  spe_counter #(.M(M), .N(N)) dut (.clk, .rst_n, .load, .load_zeros, .advance, .grants, .last, .first, .count);
  always #5 clk = ~clk;
  initial begin
    load = 0; advance = 0; load_zeros = 0; grants = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 500; v++) begin
      int z, rem, fcyc;
      z = $urandom % (M + 1);
      @(negedge clk); load = 1; load_zeros = 4'(z); advance = 0; grants = 0;
      @(negedge clk); load = 0;
      checks++;
      if (int'(count) != z || first !== 1'b1) failures++;
      rem = M - z; fcyc = 1;
      do begin
        int g;
        g = (rem < N) ? rem : (1 + $urandom % N);
        if (g > rem) g = rem;
        advance = ($urandom % 5) != 0; grants = 3'(g);
        #1;
        checks++;
        if (last !== (g == rem)) begin failures++; $display("FAIL v=%0d rem=%0d g=%0d last=%0b", v, rem, g, last); end
        if (advance) begin rem -= g; fcyc = 0; end
        @(negedge clk);
        checks++;
        if (first !== (fcyc == 1)) failures++;
        if (int'(count) != M - rem) failures++;
      end while (!(advance && rem == 0));
      advance = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
