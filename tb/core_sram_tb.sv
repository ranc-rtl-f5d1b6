// core_sram_tb: self-checking test of the core SRAM.
//
// Random reads and writes against a reference array: a read returns the word
// one cycle after 're', a simultaneous write to the same address returns the
// old word (read-first), the output holds while 're' is low, and the contents
// start at zero.
module core_sram_tb;
  localparam int NN = 16, WW = 77;
  logic clk = 0;
  logic re, we;
  logic [3:0] raddr, waddr;
  logic [WW-1:0] rdata, wdata;
  int checks = 0, failures = 0;

  core_sram #(.NUM_NEURONS(NN), .WORD_W(WW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WW-1:0] rnd_word();
    return {13'($urandom), $urandom, $urandom};
  endfunction

  initial begin
    logic [WW-1:0] ref_mem [NN];
    logic [WW-1:0] expect_q;
    bit            pending;
    foreach (ref_mem[i]) ref_mem[i] = '0;
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    // Initial contents are zero.
    for (int i = 0; i < NN; i++) begin
      @(negedge clk); re = 1; raddr = 4'(i);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== '0) begin failures++; $display("FAIL word %0d not zero", i); end
    end
    pending = 0;
    expect_q = rdata;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      checks++;
      if (rdata !== expect_q) begin
        failures++; $display("FAIL cycle %0d rdata %h expected %h", cyc, rdata, expect_q);
      end
      re = $urandom_range(0, 1) == 1; raddr = 4'($urandom);
      we = $urandom_range(0, 2) == 0; waddr = 4'($urandom);
      if (cyc % 7 == 0) waddr = raddr;
      wdata = rnd_word();
      if (re) expect_q = ref_mem[raddr];
      if (we) ref_mem[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
