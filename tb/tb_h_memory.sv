// tb_h_memory: writes random complex entries into an h_memory, reads them
// back in random order and checks the data of each read one clock later
// against a shadow copy kept by the testbench.
module tb_h_memory;
  import c3po_pkg::*;
  localparam int unsigned DEPTH = 16;
  logic clk = 0;
  logic we;
  logic [3:0] waddr, raddr;
  h_t wdata, rdata;
  h_t shadow [DEPTH];
  int checks = 0, failures = 0;

  h_memory #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 4'(a);
      wdata.re = HW'($urandom); wdata.im = HW'($urandom);
      shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    // random reads mixed with writes
    for (int n = 0; n < 400; n++) begin
      logic [3:0] ra;
      h_t exp;
      ra = 4'($urandom_range(DEPTH - 1));
      raddr = ra;
      we = ($urandom_range(3) == 0);
      waddr = 4'($urandom_range(DEPTH - 1));
      wdata.re = HW'($urandom); wdata.im = HW'($urandom);
      exp = shadow[ra];  // read of old contents in the cycle of a write
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== exp) begin
        failures++;
        $display("read %0d: got %h expected %h", ra, rdata, exp);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
