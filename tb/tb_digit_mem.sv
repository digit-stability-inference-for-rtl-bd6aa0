// tb_digit_mem: self-checking test of the digit memory: random writes
// against a reference array, registered reads one cycle after `re`,
// read-before-write on a shared address, and a held output without `re`.
module tb_digit_mem;
  import dsi_pkg::*;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic          clk = 0;
  logic          re = 0, we = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  digit_t        rdata, wdata = DIG_ZERO;

  digit_mem #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  digit_t ref_mem [DEPTH];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic digit_t rnd_digit();
    int r = $urandom_range(2, 0);
    return (r == 0) ? DIG_NEG : (r == 1) ? DIG_ZERO : DIG_POS;
  endfunction

  initial begin
    digit_t held;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = rnd_digit(); ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    // random traffic
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      re = 1; raddr = AW'($urandom_range(DEPTH - 1));
      we = $urandom_range(1); waddr = ($urandom_range(3) == 0) ? raddr : AW'($urandom_range(DEPTH - 1));
      wdata = rnd_digit();
      @(posedge clk); #1;
      checks++;
      if (rdata != ref_mem[raddr]) begin
        failures++;
        $display("read %0d: got %0d want %0d", raddr, rdata, ref_mem[raddr]);
      end
      if (we) ref_mem[waddr] = wdata;
    end
    // output holds while re is low
    @(negedge clk); re = 0; we = 0; held = rdata;
    repeat (3) @(posedge clk);
    checks++;
    if (rdata != held) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
