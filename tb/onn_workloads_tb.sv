// onn_workloads_tb -- pattern retrieval on the four smaller data-set sizes.
//
// Runs one retrieval bench per pattern size: 3x3 (two patterns), 5x4, 7x6
// and 10x10 (five patterns each), each on a network of exactly that many
// oscillators with a division factor of the next power of two above N+2.
// The 22x22 size runs on the default 506-oscillator network in
// hybrid_onn_full_tb. Patterns are random, not letters.
module onn_workloads_tb;
  logic done [4];
  int   c [4];
  int   f [4];

  onn_retrieval_bench #(.ROWS(3),  .COLS(3),  .NPAT(2), .DIV(16))  b3x3   (.done(done[0]), .checks(c[0]), .failures(f[0]));
  onn_retrieval_bench #(.ROWS(5),  .COLS(4),  .NPAT(5), .DIV(32))  b5x4   (.done(done[1]), .checks(c[1]), .failures(f[1]));
  onn_retrieval_bench #(.ROWS(7),  .COLS(6),  .NPAT(5), .DIV(64))  b7x6   (.done(done[2]), .checks(c[2]), .failures(f[2]));
  onn_retrieval_bench #(.ROWS(10), .COLS(10), .NPAT(5), .DIV(128)) b10x10 (.done(done[3]), .checks(c[3]), .failures(f[3]));

  initial begin : watchdog
    #1_000_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3],
             f[0] + f[1] + f[2] + f[3] + 1);
    $finish;
  end

  initial begin
    #1;
    wait (done[0] && done[1] && done[2] && done[3]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3],
             f[0] + f[1] + f[2] + f[3]);
    $finish;
  end
endmodule
