// tb_pbit_mac -- random states, masks, weights and biases; the field must
// equal the masked sum computed here.
module tb_pbit_mac;
  timeunit 1ns; timeprecision 1ps;
  localparam int N = 32;
  localparam int W = pbit_pkg::W_WEIGHT + $clog2(N + 1);
  logic [N-1:0] m, mask;
  pbit_pkg::weight_t j_row [N];
  pbit_pkg::weight_t h;
  logic signed [W-1:0] field;
  int checks = 0, failures = 0;

  pbit_mac #(.N(N), .W_SUM(W)) dut (.m, .mask, .j_row, .h, .field);

  initial begin : watchdog
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int e;
      m = $urandom; mask = (t < 20) ? '1 : $urandom;
      for (int j = 0; j < N; j++)
        j_row[j] = (t < 10) ? ((t % 2) ? 10'sh1FF : -10'sh200) : 10'($urandom);
      h = (t < 10) ? ((t % 2) ? 10'sh1FF : -10'sh200) : 10'($urandom);
      if (t < 10) m = '1;
      #1;
      e = int'(h);
      for (int j = 0; j < N; j++) if (m[j] && mask[j]) e += int'(j_row[j]);
      checks++;
      if (int'(field) != e) begin failures++; $display("FAIL: t=%0d got %0d exp %0d", t, field, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
