// tb_mask_memory: writes random words to every address, reads them back in
// random order and checks the data and the one-cycle read latency.
module tb_mask_memory;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned WIDTH = 16;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  mask_memory #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < int'(DEPTH); a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = WIDTH'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < 400; r++) begin
      logic [AW-1:0] a;
      a = AW'($urandom);
      raddr = a;
      // overwrite another address in the same cycle now and then
      we = (r % 3 == 0);
      waddr = AW'($urandom);
      wdata = WIDTH'($urandom);
      if (waddr == a) we = 0;
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %h exp %h", a, rdata, model[a]);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
