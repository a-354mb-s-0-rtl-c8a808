// tb_gram_row_mem: random writes and reads against a shadow array; a word
// written at an edge must be readable in the next cycle and unwritten words
// must keep their value.
module tb_gram_row_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [4:0] waddr = 0, raddr = 0;
  logic [27:0] wdata = 0, rdata;
  logic [27:0] shadow [32];
  int checks = 0, failures = 0;

  gram_row_mem dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); we = 1; waddr = 5'(i); wdata = 28'($urandom); shadow[i] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 1);
      waddr = 5'($urandom); wdata = 28'($urandom); raddr = 5'($urandom);
      #1;
      checks++;
      if (rdata != shadow[raddr]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h exp %h", raddr, rdata, shadow[raddr]);
      end
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
