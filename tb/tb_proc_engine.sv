// tb_proc_engine: self-checking test of the Processing Engine shell in the three
// configurations of the design: four 128-bit units (AES), two 256-bit units (CRC), and
// one 512-bit unit. Units are behavioural pass-through models (one with random stalls).
module tb_proc_engine;
  logic done [4];
  int c [4], f [4];
  int checks, failures;

  pe_harness #(.NU(4), .UW(128), .STALL(1)) h_aes   (.done(done[0]), .checks(c[0]), .failures(f[0]));
  pe_harness #(.NU(2), .UW(256), .STALL(1)) h_crc   (.done(done[1]), .checks(c[1]), .failures(f[1]));
  pe_harness #(.NU(1), .UW(512), .STALL(1)) h_one   (.done(done[2]), .checks(c[2]), .failures(f[2]));
  pe_harness #(.NU(4), .UW(128), .STALL(0)) h_rate  (.done(done[3]), .checks(c[3]), .failures(f[3]));

  initial begin
    #100;
    wait (done[0] && done[1] && done[2] && done[3]);
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3] + 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
