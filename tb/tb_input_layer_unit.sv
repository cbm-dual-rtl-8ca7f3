// tb_input_layer_unit: sends data points over the valid/ready handshake and
// checks that each input neuron's pulse is high for exactly v of the 256
// steps of a point, that the next point is buffered while the current one
// runs, and that the new point shows in the same cycle it is consumed.
module tb_input_layer_unit;
  localparam int NIN = 16, STEPS = 256;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, consume = 0;
  logic in_ready, avail;
  logic [NIN*8-1:0] in_data = '0;
  logic [7:0] phase = 0;
  logic [NIN-1:0] pulse_vec;
  logic [NIN*8-1:0] pts [3];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  input_layer_unit dut (.clk, .rst_n, .clear, .in_valid, .in_ready, .in_data, .consume, .phase,
    .avail, .pulse_vec);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int p = 0; p < 3; p++)
      for (int j = 0; j < NIN; j++) pts[p][j*8 +: 8] = (j == 0) ? 8'd0 : (j == 1) ? 8'd255 : 8'($urandom);
    @(negedge clk); rst_n = 1;
    chk(in_ready && !avail, "empty after reset");
    in_valid = 1; in_data = pts[0]; @(negedge clk); in_valid = 0;
    chk(!in_ready && avail, "buffer full");
    for (int p = 0; p < 2; p++) begin
      int cnt [NIN];
      foreach (cnt[j]) cnt[j] = 0;
      for (int t = 0; t < STEPS; t++) begin
        phase = 8'(t);
        consume = (t == 0);
        #1;
        for (int j = 0; j < NIN; j++) begin
          chk(pulse_vec[j] == (t < int'(pts[p][j*8 +: 8])), "pulse shape");
          cnt[j] += int'(pulse_vec[j]);
        end
        @(negedge clk);
        consume = 0;
        if (t == 10) begin
          chk(in_ready, "ready while running");
          in_valid = 1; in_data = pts[p + 1]; @(negedge clk); in_valid = 0;
          chk(avail, "next point buffered");
        end
      end
      for (int j = 0; j < NIN; j++) chk(cnt[j] == int'(pts[p][j*8 +: 8]), "pulse length = v");
    end
    clear = 1; @(negedge clk); clear = 0;
    chk(!avail, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
