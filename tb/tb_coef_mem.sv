// tb_coef_mem: self-checking test of the coefficient store at its default
// size (78 words of 80 bits). Fills every word with random data, reads it back
// in random order, one address per clock, and checks the one-clock read
// latency, then checks that a
// write to one word leaves the others alone and that a read issued in the
// same clock as a write to that address returns the old word.
module tb_coef_mem;

  localparam int WIDTH = 80, DEPTH = 78, AW = $clog2(DEPTH);

  logic             clk = 1'b0;
  logic             we;
  logic [AW-1:0]    waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;

  coef_mem u_dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                  .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  task automatic check(string what, logic [WIDTH-1:0] got, logic [WIDTH-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic logic [WIDTH-1:0] rnd();
    return WIDTH'({$urandom, $urandom, $urandom});
  endfunction

  initial begin
    we = 1'b0;
    waddr = '0;
    raddr = '0;
    wdata = '0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1'b1;
      waddr = AW'(a);
      wdata = rnd();
      model[a] = wdata;
      @(negedge clk);
    end
    we = 1'b0;
    // Pipelined reads: a new address every clock; each check is made just
    // after the next address is applied, so rdata must still show the word
    // of the address presented one clock earlier.
    for (int t = 0; t < 300; t++) begin
      int a, prev;
      prev = int'(raddr);
      @(negedge clk);
      a = $urandom_range(0, DEPTH - 1);
      raddr = AW'(a);
      #1;
      check($sformatf("read %0d one clock after address", prev), rdata, model[prev]);
    end
    @(negedge clk);
    // Overwrite one word; read-during-write returns the old word.
    we = 1'b1;
    waddr = AW'(5);
    wdata = rnd();
    raddr = AW'(5);
    @(negedge clk);
    check("read during write gives old data", rdata, model[5]);
    model[5] = wdata;
    we = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      raddr = AW'(a);
      @(negedge clk);
      check($sformatf("after overwrite %0d", a), rdata, model[a]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
