// tb_vtd_sample_buffer: writes random 7 x 16-bit rows into the 70-row sample
// buffer at random addresses, keeps its own copy, and reads rows back at
// random, checking each against the copy one cycle after the read request.
// It also checks that a row read is held while no read is requested.
module tb_vtd_sample_buffer;

  localparam int unsigned NCH   = 7;
  localparam int unsigned W     = 16;
  localparam int unsigned DEPTH = 70;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic                    clk = 1'b0;
  logic                    we = 1'b0, re = 1'b0;
  logic [AW-1:0]           waddr = '0, raddr = '0;
  logic [NCH-1:0][W-1:0]   wdata = '0, rdata;

  logic [NCH-1:0][W-1:0]   model [DEPTH];
  bit                      written [DEPTH];

  int checks = 0, failures = 0;

  vtd_sample_buffer dut (
    .clk_i(clk), .we_i(we), .waddr_i(waddr), .wdata_i(wdata),
    .re_i(re), .raddr_i(raddr), .rdata_o(rdata)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write_row(input int a);
    logic [NCH-1:0][W-1:0] d;
    for (int c = 0; c < int'(NCH); c++) d[c] = W'($urandom);
    @(negedge clk);
    we = 1'b1; waddr = AW'(a); wdata = d;
    @(negedge clk);
    we = 1'b0;
    model[a]   = d;
    written[a] = 1'b1;
  endtask

  task automatic read_row(input int a);
    @(negedge clk);
    re = 1'b1; raddr = AW'(a);
    @(negedge clk);
    re = 1'b0;
    raddr = AW'($urandom_range(DEPTH - 1));
    check(rdata == model[a], $sformatf("row %0d read %h expected %h", a, rdata, model[a]));
    // Held while no read is requested, whatever the address.
    @(negedge clk);
    check(rdata == model[a], $sformatf("row %0d not held", a));
  endtask

  initial begin
    // Fill every row once, in order, then overwrite random rows.
    for (int a = 0; a < int'(DEPTH); a++) write_row(a);
    for (int i = 0; i < 100; i++) write_row($urandom_range(DEPTH - 1));
    for (int a = 0; a < int'(DEPTH); a++) read_row(a);
    for (int i = 0; i < 100; i++) begin
      if ($urandom_range(1)) write_row($urandom_range(DEPTH - 1));
      else                   read_row($urandom_range(DEPTH - 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
