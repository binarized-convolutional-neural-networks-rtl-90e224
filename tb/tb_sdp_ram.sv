// tb_sdp_ram: random writes and reads of the simple dual-port RAM against a
// shadow array; checks one-cycle read latency, that the output holds while
// re is low, and read-before-write on an address collision.
//
// Random stimulus; nothing here is taken from published numbers.
module tb_sdp_ram;
  localparam int unsigned WIDTH = 40;
  localparam int unsigned DEPTH = 64;

  logic             clk = 0;
  logic             we = 0, re = 0;
  logic [5:0]       waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] exp, held;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = {$urandom, 8'($urandom)};
      shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    // random traffic
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we    = 1'($urandom);
      waddr = 6'($urandom);
      wdata = {$urandom, 8'($urandom)};
      re    = 1'($urandom);
      raddr = ($urandom % 4 == 0) ? waddr : 6'($urandom);
      exp   = shadow[raddr];
      held  = rdata;
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
      checks++;
      if (re ? (rdata !== exp) : (rdata !== held)) begin
        failures++;
        $display("n=%0d re=%0d addr=%0d got %h expected %h", n, re, raddr, rdata, re ? exp : held);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
