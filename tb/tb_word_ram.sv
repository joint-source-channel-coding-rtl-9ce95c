// tb_word_ram - random writes and reads against a shadow array, including a
// read of the address being written (old data until the clock edge).
module tb_word_ram;
  localparam int W = 96, DEPTH = 37, AW = 6;
  logic clk = 0;
  logic we = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  word_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom, $urandom};
      shadow[a] = wdata;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1);
      waddr = AW'($urandom_range(0, DEPTH - 1));
      wdata = {$urandom, $urandom, $urandom};
      raddr = (t % 7 == 0) ? waddr : AW'($urandom_range(0, DEPTH - 1));
      #1;
      checks++;
      if (rdata !== shadow[raddr]) begin failures++; $display("FAIL read %0d", raddr); end
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
