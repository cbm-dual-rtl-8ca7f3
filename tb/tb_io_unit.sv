// tb_io_unit: checks the host port decode (parameter, weight, mask and
// initial-state writes land on the right strobes with the right row/word)
// and the registered reads of status, SA solution (RC neurons masked to 0)
// and mask words.
module tb_io_unit;
  import cbm_pkg::*;
  localparam int N = 128;
  logic clk = 0, rst_n = 0, h_we = 0, h_re = 0;
  logic [23:0] h_addr = 0;
  logic [63:0] h_wdata = 0, h_rdata, wdata;
  logic h_rvalid, mask_we, win_we, wcbm_we, wout_we;
  param_wr_t pw;
  logic [11:0] wrow;
  logic [7:0] wword;
  logic [N-1:0] s_we, s_wdata, s_vec, rc_mask;
  logic busy = 1, done = 0, stall = 1;
  logic [5:0] alpha_sa = 6'd37;
  logic [31:0] step_cnt = 32'd12345;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  io_unit #(.N_CBM(N)) dut (.clk, .rst_n, .h_we, .h_re, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
    .pw, .mask_we, .win_we, .wcbm_we, .wout_we, .wrow, .wword, .wdata, .s_we, .s_wdata,
    .s_vec, .rc_mask, .busy, .done, .stall, .alpha_sa, .step_cnt);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic rd(int region, int word, output logic [63:0] d);
    h_re = 1; h_addr = {4'(region), 12'd0, 8'(word)};
    @(negedge clk);
    h_re = 0;
    chk(h_rvalid, "read valid after one clock");
    d = h_rdata;
  endtask

  initial begin
    logic [63:0] d;
    s_vec = {$urandom, $urandom, $urandom, $urandom};
    rc_mask = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int reg_n, row, word;
      reg_n = int'($urandom_range(0, 5)); row = int'($urandom_range(0, 4095)); word = int'($urandom_range(0, 1));
      h_we = 1; h_addr = {4'(reg_n), 12'(row), 8'(word)}; h_wdata = {$urandom, $urandom};
      #1;
      chk(pw.we == (reg_n == 0) && win_we == (reg_n == 1) && wcbm_we == (reg_n == 2) &&
          wout_we == (reg_n == 3) && mask_we == (reg_n == 4), "write strobe decode");
      chk(wrow == 12'(row) && wword == 8'(word) && wdata == h_wdata && pw.num == 8'(word), "row/word");
      for (int k = 0; k < N; k++)
        chk(s_we[k] == (reg_n == 5 && k / 64 == word) && s_wdata[k] == h_wdata[k % 64], "S init strobe");
      @(negedge clk);
      h_we = 0;
    end
    rd(0, 0, d);
    chk(d == {1'b1, 1'b0, 1'b1, 23'd0, 6'd37, 32'd12345}, "status word");
    for (int w = 0; w < 2; w++) begin
      rd(6, w, d);
      chk(d == (s_vec[w*64 +: 64] & ~rc_mask[w*64 +: 64]), "SA solution word");
      rd(4, w, d);
      chk(d == rc_mask[w*64 +: 64], "mask word");
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
