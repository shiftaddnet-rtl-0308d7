// tb_buffer_ram: writes random words, reads them back one cycle after the address,
// and checks read-during-write returns the old word.
module tb_buffer_ram;
  localparam int DEPTH = 200, WIDTH = 12, AW = $clog2(DEPTH);

  logic             clk = 1'b0;
  logic             we;
  logic [AW-1:0]    waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  buffer_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] old;
    we = 1'b0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = WIDTH'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int i = 0; i < 3 * DEPTH; i++) begin
      int a = $urandom_range(DEPTH-1);
      raddr = AW'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL read %0d got %h exp %h", a, rdata, model[a]);
      end
    end
    // read and write the same word in one cycle: the old word comes back
    for (int i = 0; i < 20; i++) begin
      int a = $urandom_range(DEPTH-1);
      old = model[a];
      raddr = AW'(a); waddr = AW'(a); we = 1'b1; wdata = ~old; model[a] = ~old;
      @(negedge clk);
      we = 1'b0;
      checks++;
      if (rdata !== old) failures++;
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
