// sram_buffer_tb: writes random data to random and edge addresses of a small
// bank, reads them back in a different order and checks each word one cycle
// after its read, against a copy kept in the testbench; also checks that a
// write does not disturb rdata.
module sram_buffer_tb;
  localparam int WIDTH = 64, DEPTH = 256;
  logic clk = 0, en = 0, we = 0;
  logic [$clog2(DEPTH)-1:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  sram_buffer #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] held;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = a[7:0];
      wdata = {$urandom, $urandom};
      ref_mem[a] = wdata;
    end
    for (int i = 0; i < 3 * DEPTH; i++) begin
      int a;
      a = (i < DEPTH) ? (DEPTH - 1 - i) : int'($urandom_range(0, DEPTH - 1));
      @(negedge clk);
      en = 1; we = 0; addr = a[7:0];
      @(negedge clk);
      en = 0;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++; $display("FAIL addr %0d read %h expected %h", a, rdata, ref_mem[a]);
      end
      if (i % 50 == 0) begin   // overwrite one word, rdata must hold
        held = rdata;
        en = 1; we = 1; addr = 8'(a + 1); wdata = ~ref_mem[(a + 1) % DEPTH];
        ref_mem[(a + 1) % DEPTH] = wdata;
        @(negedge clk); en = 0;
        checks++;
        if (rdata !== held) begin failures++; $display("FAIL rdata changed on write"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
