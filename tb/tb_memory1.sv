// tb_memory1: fills W^CBM and W^IN with a pattern through the word write
// port, then reads random indices and checks the registered row, its tags
// and the one-clock read latency.
module tb_memory1;
  localparam int N = 64, NIN = 4, DW = 64;
  localparam int CW = N * 2 / DW, IWD = N * 8 / DW;
  logic clk = 0, we_cbm = 0, we_in = 0, rd_en = 0, rd_add = 0;
  logic [11:0] wrow = 0;
  logic [7:0] wword = 0;
  logic [DW-1:0] wdata = 0;
  logic [6:0] rd_idx = 0;
  logic q_valid, q_add, q_is_in;
  logic [N*2-1:0] q_w_cbm;
  logic [N*8-1:0] q_w_in;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  memory1 #(.N_CBM(N), .N_IN(NIN)) dut (.clk, .we_cbm, .we_in, .wrow, .wword, .wdata,
    .rd_en, .rd_idx, .rd_add, .q_valid, .q_add, .q_is_in, .q_w_cbm, .q_w_in);

  function automatic logic [DW-1:0] pat(int r, int w, int sel);
    return {32'(r * 977 + w * 31 + sel * 7 + 5), 32'(r * 13 ^ w * 101 ^ sel)};
  endfunction

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int r = 0; r < N; r++) for (int w = 0; w < CW; w++) begin
      @(negedge clk); we_cbm = 1; wrow = 12'(r); wword = 8'(w); wdata = pat(r, w, 0);
    end
    for (int r = 0; r < NIN; r++) for (int w = 0; w < IWD; w++) begin
      @(negedge clk); we_cbm = 0; we_in = 1; wrow = 12'(r); wword = 8'(w); wdata = pat(r, w, 1);
    end
    @(negedge clk); we_in = 0;
    for (int n = 0; n < 300; n++) begin
      int i; bit a;
      i = int'($urandom_range(0, N + NIN - 1)); a = 1'($urandom);
      rd_en = 1; rd_idx = 7'(i); rd_add = a;
      @(negedge clk);
      rd_en = 0;
      chk(q_valid && q_add == a && q_is_in == (i >= N), "tags");
      if (i < N) for (int w = 0; w < CW; w++)  chk(q_w_cbm[w*DW +: DW] == pat(i, w, 0), "W^CBM row");
      else       for (int w = 0; w < IWD; w++) chk(q_w_in[w*DW +: DW] == pat(i - N, w, 1), "W^IN row");
      @(negedge clk);
      chk(!q_valid, "valid drops");
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
