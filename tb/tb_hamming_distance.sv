// tb_hamming_distance: random and corner-case census vector pairs, with
// the expected distance counted bit by bit in the testbench.
module tb_hamming_distance;
  localparam int N = 48;
  logic [N-1:0] a, b;
  logic [5:0]   d;
  int checks = 0, failures = 0;

  hamming_distance #(.NBITS(N)) dut (.a, .b, .distance(d));

  task automatic check();
    int e = 0;
    #1;
    for (int i = 0; i < N; i++) if (a[i] != b[i]) e++;
    checks++;
    if (d != 6'(e)) begin
      failures++;
      $display("a=%h b=%h got %0d exp %0d", a, b, d, e);
    end
  endtask

  initial begin
    a = '0; b = '0; check();
    a = '1; b = '0; check();
    a = '1; b = '1; check();
    a = 48'h1; b = '0; check();
    a = 48'h8000_0000_0000; b = '0; check();
    for (int t = 0; t < 500; t++) begin
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
