// tb_sp_sram: random writes and reads against a shadow array; checks the
// one-cycle read latency and that a disabled port neither writes nor reads.
module tb_sp_sram;
  localparam int DEPTH = 1024;
  logic clk = 0, ce = 0, we = 0;
  logic [9:0] addr = 0;
  logic [15:0] wdata = 0, rdata;
  logic [15:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sp_sram #(.DEPTH(DEPTH), .WIDTH(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] held;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); ce = 1; we = 1; addr = 10'(a); wdata = 16'($urandom); shadow[a] = wdata;
    end
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      ce = 1; addr = 10'($urandom);
      we = ($urandom % 3 == 0);
      wdata = 16'($urandom);
      if (we) shadow[addr] = wdata;
      else begin
        @(negedge clk);
        checks++;
        if (rdata !== shadow[addr]) begin
          failures++;
          $display("FAIL addr %0d: %h vs %h", addr, rdata, shadow[addr]);
        end
        ce = 0;
      end
    end
    // disabled port: no write, rdata holds
    @(negedge clk); ce = 1; we = 0; addr = 5;
    @(negedge clk); held = rdata; ce = 0; we = 1; wdata = ~shadow[5];
    @(negedge clk); we = 0;
    checks++;
    if (rdata !== held) begin failures++; $display("FAIL hold"); end
    ce = 1; addr = 5;
    @(negedge clk);
    checks++;
    if (rdata !== shadow[5]) begin failures++; $display("FAIL write while disabled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
