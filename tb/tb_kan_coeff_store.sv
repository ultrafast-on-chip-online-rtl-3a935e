// tb_kan_coeff_store: loads every coefficient through the host port, then
// reads the active window of every cell and applies random in-place window
// updates, comparing with a plain array model. Runs the default cubic store
// (4 banks) and a quadratic one (S=2, 3 banks, a non-power-of-two bank count).
module tb_kan_coeff_store;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // default: G=10, S=3, WW=7
  logic [3:0] k0;
  logic signed [6:0] rd0 [4], wr0 [4], cw0, cr0;
  logic we0, cwe0;
  logic [3:0] cc0;
  kan_coeff_store dut0 (.clk, .rst_n, .k(k0), .rd_w(rd0), .wr_en(we0), .wr_w(wr0),
                        .cfg_we(cwe0), .cfg_c(cc0), .cfg_wdata(cw0), .cfg_rdata(cr0));
  // S=2, G=7, WW=9
  logic [2:0] k1;
  logic signed [8:0] rd1 [3], wr1 [3], cw1, cr1;
  logic we1, cwe1;
  logic [3:0] cc1;
  kan_coeff_store #(.G(7), .S(2), .WW(9)) dut1 (.clk, .rst_n, .k(k1), .rd_w(rd1), .wr_en(we1),
                        .wr_w(wr1), .cfg_we(cwe1), .cfg_c(cc1), .cfg_wdata(cw1), .cfg_rdata(cr1));

  int m0 [13];
  int m1 [9];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we0 = 0; cwe0 = 0; k0 = 0; cc0 = 0; cw0 = 0;
    we1 = 0; cwe1 = 0; k1 = 0; cc1 = 0; cw1 = 0;
    for (int r = 0; r < 4; r++) wr0[r] = '0;
    for (int r = 0; r < 3; r++) wr1[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // reset leaves zeros
    @(negedge clk);
    cc0 = 4'd12; cc1 = 4'd8;
    #1;
    check("reset0", cr0, 0);
    check("reset1", cr1, 0);
    // host load
    for (int c = 0; c < 13; c++) begin
      @(negedge clk);
      m0[c] = $signed(7'($urandom));
      cwe0 = 1; cc0 = 4'(c); cw0 = 7'(m0[c]);
      if (c < 9) begin
        m1[c] = $signed(9'($urandom));
        cwe1 = 1; cc1 = 4'(c); cw1 = 9'(m1[c]);
      end else cwe1 = 0;
    end
    @(negedge clk);
    cwe0 = 0; cwe1 = 0;
    for (int c = 0; c < 13; c++) begin
      cc0 = 4'(c);
      cc1 = 4'(c % 9);
      #1;
      check("cfg read0", cr0, m0[c]);
      check("cfg read1", cr1, m1[c % 9]);
    end
    // windows and in-place updates
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      k0 = 4'($urandom_range(0, 9));
      k1 = 3'($urandom_range(0, 6));
      #1;
      for (int r = 0; r < 4; r++) check("window0", rd0[r], m0[k0 + r]);
      for (int r = 0; r < 3; r++) check("window1", rd1[r], m1[k1 + r]);
      we0 = ($urandom_range(0, 1) == 1);
      we1 = ($urandom_range(0, 1) == 1);
      for (int r = 0; r < 4; r++) wr0[r] = 7'($urandom);
      for (int r = 0; r < 3; r++) wr1[r] = 9'($urandom);
      @(posedge clk);
      if (we0) for (int r = 0; r < 4; r++) m0[k0 + r] = int'(wr0[r]);
      if (we1) for (int r = 0; r < 3; r++) m1[k1 + r] = int'(wr1[r]);
      @(negedge clk);
      we0 = 0; we1 = 0;
      for (int c = 0; c < 13; c++) begin
        cc0 = 4'(c);
        cc1 = 4'(c % 9);
        #1;
        check("after update0", cr0, m0[c]);
        check("after update1", cr1, m1[c % 9]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
