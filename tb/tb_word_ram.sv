// tb_word_ram: random writes and reads on both read ports against a shadow array.
module tb_word_ram;
  logic clk = 0;
  always #1 clk = ~clk;
  logic we;
  logic [5:0] waddr, raddr0, raddr1;
  logic [31:0] wdata, rdata0, rdata1;
  logic [31:0] shadow [64];
  int checks = 0, failures = 0;
  word_ram #(.WIDTH(32), .DEPTH(64)) dut (.*);
  initial begin
    we = 0; waddr = 0; wdata = 0; raddr0 = 0; raddr1 = 0;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = $urandom; shadow[a] = wdata;
    end
    for (int v = 0; v < 500; v++) begin
      @(negedge clk);
      we = $urandom & 1; waddr = 6'($urandom); wdata = $urandom;
      raddr0 = 6'($urandom); raddr1 = 6'($urandom);
      // the rising edge: reads still show the old contents, the write lands after it
      @(posedge clk);
      checks += 2;
      if (rdata0 != shadow[raddr0]) failures++;
      if (rdata1 != shadow[raddr1]) failures++;
      if (we) shadow[waddr] = wdata;
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
