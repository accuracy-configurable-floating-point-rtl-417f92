// tb_cim_sram: self-checking test of cim_sram at its default 64 x 32 size.
//
// Fills every row with a value derived from its address, reads all rows back
// in a different order and checks the one-cycle read latency, that rdata
// holds while re is low, and that a read of the row being written in the
// same cycle returns the old word. Random write/read traffic is compared with
// a shadow array kept in the testbench.
module tb_cim_sram;
  localparam int ROWS = 64;
  int checks = 0, failures = 0;

  logic        clk = 0;
  logic        we = 0, re = 0;
  logic [5:0]  waddr = 0, raddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [31:0] shadow [ROWS];

  cim_sram #(.ROWS(ROWS), .WIDTH(32)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                                           .re(re), .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] exp_q;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      we = 1; waddr = 6'(r); wdata = 32'h3f800000 + 32'(r * 4099);
      shadow[r] = wdata;
      @(negedge clk);
    end
    we = 0;
    // read back in reverse order: data appears one cycle after re
    for (int r = ROWS - 1; r >= 0; r--) begin
      re = 1; raddr = 6'(r);
      @(negedge clk);
      check("readback", rdata, shadow[r]);
    end
    // rdata holds while re is low
    re = 0; raddr = 6'd3;
    @(negedge clk);
    @(negedge clk);
    check("hold", rdata, shadow[0]);
    // read and write of the same row in one cycle: old word is read
    re = 1; raddr = 6'd7; we = 1; waddr = 6'd7; wdata = 32'hdeadbeef;
    @(negedge clk);
    check("read-during-write", rdata, shadow[7]);
    shadow[7] = 32'hdeadbeef;
    we = 0;
    @(negedge clk);
    check("after write", rdata, 32'hdeadbeef);
    // random traffic
    for (int i = 0; i < 2000; i++) begin
      we = 1'($urandom); waddr = 6'($urandom); wdata = $urandom;
      re = 1; raddr = 6'($urandom);
      exp_q = shadow[raddr];
      @(negedge clk);
      check("random", rdata, exp_q);
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
