// tb_input_buffer: writes random 32-bit words, reads every 16-bit entry back
// (even entry = low half) and checks the 1-cycle read latency and hold.
module tb_input_buffer;
  localparam int WORDS = 12288;
  logic clk = 0, we = 0, re = 0;
  logic [13:0] waddr = 0;
  logic [14:0] raddr = 0;
  logic [31:0] wdata = 0;
  logic [15:0] rdata;
  logic [31:0] model [int];
  int checks = 0, failures = 0;

  input_buffer dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    @(negedge clk);
    for (int i = 0; i < 500; i++) begin
      a = (i == 0) ? 0 : (i == 1) ? WORDS - 1 : $urandom_range(WORDS - 1);
      we = 1; waddr = 14'(a); wdata = $urandom; model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    foreach (model[w]) for (int h = 0; h < 2; h++) begin
      re = 1; raddr = 15'(w * 2 + h);
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== model[w][h*16 +: 16]) begin
        failures++;
        if (failures < 5) $display("entry %0d: %h expected %h", w * 2 + h, rdata, model[w][h*16 +: 16]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
