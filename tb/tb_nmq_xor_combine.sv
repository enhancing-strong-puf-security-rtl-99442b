// tb_nmq_xor_combine: self-checking test of the k-XOR composition. Random
// response vectors and masks (including single-instance, 2- and 3-instance
// masks and the empty mask); the expected value is counted bit by bit.
module tb_nmq_xor_combine;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int N = 10;
  logic [N-1:0] resp, mask;
  logic         r;
  int checks = 0, failures = 0;

  nmq_xor_combine #(.N(N)) dut (.resp(resp), .mask(mask), .r(r));

  initial begin
    #1_000_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    for (int t = 0; t < 400; t++) begin
      resp = N'($urandom);
      case (t % 4)
        0: mask = N'(1) << ($urandom % N);
        1: mask = (N'(1) << ($urandom % N)) | (N'(1) << ($urandom % N));
        2: mask = N'(7) << ($urandom % (N - 2));
        default: mask = (t == 3) ? '0 : N'($urandom);
      endcase
      #10;
      ones = 0;
      for (int i = 0; i < N; i++) if (resp[i] && mask[i]) ones++;
      checks++;
      if (r !== ones[0]) begin
        failures++;
        $display("FAIL: resp=%b mask=%b r=%b", resp, mask, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
