// tb_weight_buffer: writes random 160-bit rows word by word at scattered addresses
// (first and last row included), reads them back, and checks the 1-cycle read
// latency and that rdata holds while re is low.
module tb_weight_buffer;
  localparam int DEPTH = 4608;
  logic clk = 0, re = 0, we = 0;
  logic [12:0] raddr = 0, waddr = 0;
  logic [2:0] wsel = 0;
  logic [31:0] wdata = 0;
  logic [159:0] rdata;
  logic [159:0] model [int];
  int checks = 0, failures = 0;

  weight_buffer dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wsel, .wdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rows [$];
    logic [159:0] r;
    rows.push_back(0);
    rows.push_back(DEPTH - 1);
    for (int i = 0; i < 300; i++) rows.push_back($urandom_range(DEPTH - 1));
    @(negedge clk);
    foreach (rows[i]) begin
      for (int k = 0; k < 5; k++) r[k*32 +: 32] = $urandom;
      model[rows[i]] = r;
      for (int k = 0; k < 5; k++) begin
        we = 1; waddr = 13'(rows[i]); wsel = 3'(k); wdata = r[k*32 +: 32];
        @(negedge clk);
      end
    end
    we = 0;
    foreach (model[a]) begin
      re = 1; raddr = 13'(a);
      @(negedge clk);
      re = 0; raddr = 13'($urandom_range(DEPTH - 1));
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        if (failures < 5) $display("row %0d: %h expected %h", a, rdata, model[a]);
      end
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) failures++;   // held while re = 0
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
