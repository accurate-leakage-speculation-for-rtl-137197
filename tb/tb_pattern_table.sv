// tb_pattern_table -- checks the programmable pattern table (W=10, 3 read
// ports): empty after reset, every bit written and read back on every
// port, overwrites, and simultaneous reads at different addresses.
//
// The 10-bit two-round window is published; the table being writable and
// one bit wide per word is this design's own choice. Writes are synchronous,
// reads combinational and sampled #1 after the inputs change.
module tb_pattern_table;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic            cfg_we, cfg_data;
  logic [9:0]      cfg_addr;
  logic [2:0][9:0] rd_addr;
  logic [2:0]      rd_hit;
  bit              model[1024];

  pattern_table #(.W(10), .NRD(3)) dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_data = 0; cfg_addr = 0; rd_addr = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    for (int i = 0; i < 1024; i += 3) begin
      rd_addr = {10'(i), 10'(i + 1), 10'(i + 2)};
      #1;
      chk(rd_hit == 3'b000, "empty after reset");
    end
    for (int pass = 0; pass < 2; pass++)
      for (int i = 0; i < 1024; i++) begin
        model[i] = 1'($urandom);
        cfg_we   <= 1;
        cfg_addr <= 10'(i);
        cfg_data <= model[i];
        @(negedge clk);
      end
    cfg_we <= 0;
    @(negedge clk);
    for (int t = 0; t < 3000; t++) begin
      int a0, a1, a2;
      a0 = $urandom % 1024; a1 = $urandom % 1024; a2 = $urandom % 1024;
      rd_addr = {10'(a2), 10'(a1), 10'(a0)};
      #1;
      chk(rd_hit[0] == model[a0] && rd_hit[1] == model[a1] && rd_hit[2] == model[a2],
          $sformatf("read %0d %0d %0d", a0, a1, a2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
