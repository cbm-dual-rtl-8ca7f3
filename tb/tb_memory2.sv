// tb_memory2: writes W^OUT rows word by word (including the padded top word)
// and checks registered reads of random rows, the add tag and latency.
module tb_memory2;
  localparam int N = 64, NOUT = 10, DW = 64, ROW = NOUT * 16;
  logic clk = 0, we = 0, rd_en = 0, rd_add = 0;
  logic [11:0] wrow = 0;
  logic [7:0] wword = 0;
  logic [DW-1:0] wdata = 0;
  logic [5:0] rd_idx = 0;
  logic q_valid, q_add;
  logic [ROW-1:0] q_w;
  logic [192-1:0] rows [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  memory2 #(.N_CBM(N), .N_OUT(NOUT)) dut (.clk, .we, .wrow, .wword, .wdata, .rd_en, .rd_idx, .rd_add,
    .q_valid, .q_add, .q_w);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int r = 0; r < N; r++) begin
      rows[r] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int w = 0; w < 3; w++) begin
        @(negedge clk); we = 1; wrow = 12'(r); wword = 8'(w); wdata = rows[r][w*DW +: DW];
      end
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++) begin
      int i; bit a;
      i = int'($urandom_range(0, N - 1)); a = 1'($urandom);
      rd_en = 1; rd_idx = 6'(i); rd_add = a;
      @(negedge clk);
      rd_en = 0;
      chk(q_valid && q_add == a, "tags");
      chk(q_w == rows[i][ROW-1:0], "W^OUT row");
    end
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
