// tb_sp_ram: self-checking testbench of sp_ram.
//
// Writes random words to random addresses of a 64 x 19 instance, mirrors
// them in a testbench array, and checks one-cycle read data, that rdata holds
// its value during idle cycles and during writes, and that a write does not
// disturb other addresses.
module tb_sp_ram;
  localparam int DEPTH = 64;
  localparam int WIDTH = 19;
  logic             clk = 1'b0;
  logic             en = 1'b0;
  logic             we = 1'b0;
  logic [5:0]       addr = '0;
  logic [WIDTH-1:0] wdata = '0;
  logic [WIDTH-1:0] rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  sp_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] held;
    // fill every word
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      en = 1'b1; we = 1'b1; addr = 6'(a); wdata = WIDTH'($urandom);
      ref_mem[a] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      en   = 1'b1;
      we   = ($urandom_range(0, 2) == 0);
      addr = 6'($urandom_range(0, DEPTH - 1));
      wdata = WIDTH'($urandom);
      if (we) begin
        held = rdata;
        ref_mem[addr] = wdata;
        @(negedge clk);
        en = 1'b0;
        chk(rdata == held, "rdata must hold during a write");
      end else begin
        @(negedge clk);
        en = 1'b0;
        chk(rdata == ref_mem[addr], $sformatf("read %0d: %h expected %h", addr, rdata, ref_mem[addr]));
        held = rdata;
        @(negedge clk);
        chk(rdata == held, "rdata must hold while idle");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
