// tb_skew_buffer -- checks that lane i of the skew buffer is delayed by
// exactly i cycles, that lane 0 passes straight through, and that reset
// clears the delay lines. Uses a 5-lane, 12-bit instance with random data.
module tb_skew_buffer;
  localparam int L = 5, W = 12, N = 200;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [L-1:0][W-1:0] d, q;
  logic [L-1:0][W-1:0] hist[N];

  skew_buffer #(.LANES(L), .W(W)) dut (.clk, .rst_n, .d_i(d), .d_o(q));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '1;
    repeat (2) @(posedge clk);
    #1;
    d = '0;
    for (int i = 1; i < L; i++) begin
      checks++;
      if (q[i] != '0) begin failures++; $display("FAIL lane %0d not reset", i); end
    end
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      for (int i = 0; i < L; i++) d[i] = W'($urandom);
      hist[n] = d;
      #1;
      // Lane i now shows what entered i cycles ago (zero before the start).
      for (int i = 0; i < L; i++) begin
        checks++;
        if (q[i] != ((n >= i) ? hist[n-i][i] : W'(0))) begin
          failures++;
          $display("FAIL cycle %0d lane %0d: %h", n, i, q[i]);
        end
      end
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
