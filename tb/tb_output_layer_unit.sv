// tb_output_layer_unit: applies random signed W^OUT rows with ADD/SUB and
// checks every O_k against a running sum kept here; also checks clear.
module tb_output_layer_unit;
  localparam int NOUT = 10;
  logic clk = 0, rst_n = 0, clear = 0, acc_en = 0, acc_add = 0;
  logic [NOUT*16-1:0] w_row = '0;
  logic [NOUT*26-1:0] o_vec;
  longint m [NOUT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  output_layer_unit #(.N_OUT(NOUT)) dut (.clk, .rst_n, .clear, .acc_en, .acc_add, .w_row, .o_vec);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    foreach (m[k]) m[k] = 0;
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      bit a, en;
      a = 1'($urandom); en = ($urandom_range(0, 3) != 0);
      for (int k = 0; k < NOUT; k++) w_row[k*16 +: 16] = 16'($urandom);
      acc_en = en; acc_add = a;
      if (en) for (int k = 0; k < NOUT; k++)
        m[k] += a ? longint'($signed(w_row[k*16 +: 16])) : -longint'($signed(w_row[k*16 +: 16]));
      @(negedge clk);
      for (int k = 0; k < NOUT; k++) chk(longint'($signed(o_vec[k*26 +: 26])) == m[k], "O_k");
    end
    acc_en = 0; clear = 1; @(negedge clk); clear = 0;
    chk(o_vec == '0, "clear");
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
