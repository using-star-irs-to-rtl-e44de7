// tb_sp_ram: self-checking test of the on-chip RAM. Fills the whole memory with random
// words, reads every address back and checks the one-cycle read latency and that a read
// of an address being written returns the old word.
module tb_sp_ram;
  localparam int unsigned WIDTH = 12;
  localparam int unsigned DEPTH = 100;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic             we;
  logic [AW-1:0]    waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sp_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; wdata = '0; raddr = '0;
    @(posedge clk);
    for (int a = 0; a < int'(DEPTH); a++) begin
      we <= 1; waddr <= AW'(a); wdata <= WIDTH'($urandom); 
      @(posedge clk);
      model[a] = wdata;
    end
    we <= 0;
    for (int a = 0; a < int'(DEPTH); a++) begin
      raddr <= AW'(a);
      @(posedge clk);   // address sampled here
      #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("read %0d: got %h expected %h", a, rdata, model[a]);
      end
    end
    // Read-during-write to the same address returns the old contents.
    raddr <= AW'(7); waddr <= AW'(7); wdata <= ~model[7]; we <= 1;
    @(posedge clk); #1;
    checks++;
    if (rdata !== model[7]) begin failures++; $display("read-during-write returned new data"); end
    we <= 0;
    @(posedge clk); #1;
    checks++;
    if (rdata !== ~model[7]) begin failures++; $display("write during read was lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
