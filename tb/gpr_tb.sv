// gpr_tb: self-checking test of the GPR register file.
// Random writes and reads on both read ports at the full 16384-entry size,
// compared with a shadow copy kept in the testbench; also checks that a read
// in the cycle of a write still returns the old value (write is clocked).
module gpr_tb;
  import pim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [GPR_AW-1:0] waddr, raddr_a, raddr_b;
  tile_t wdata, rdata_a, rdata_b;
  gpr dut (.*);

  tile_t shadow [int];
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tile_t rnd_tile();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    we = 0; waddr = '0; wdata = '0; raddr_a = '0; raddr_b = '0;
    // fill a window of addresses, including both ends
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      we = 1;
      waddr = (i < 100) ? GPR_AW'(i) : GPR_AW'(GPR_ENTRIES - 1 - (i - 100));
      wdata = rnd_tile();
      shadow[int'(waddr)] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 2000; i++) begin
      int a, b;
      tile_t old;
      @(negedge clk);
      a = $urandom_range(0, 199); a = (a < 100) ? a : GPR_ENTRIES - 1 - (a - 100);
      b = $urandom_range(0, 199); b = (b < 100) ? b : GPR_ENTRIES - 1 - (b - 100);
      raddr_a = GPR_AW'(a); raddr_b = GPR_AW'(b);
      we = ($urandom_range(0, 1) == 1);
      waddr = raddr_a;
      wdata = rnd_tile();
      #1;
      checks++; if (rdata_a !== shadow[a]) begin failures++; $display("FAIL port A @%0d", a); end
      checks++; if (rdata_b !== shadow[b]) begin failures++; $display("FAIL port B @%0d", b); end
      @(posedge clk); #1;
      if (we) shadow[a] = wdata;
      checks++; if (rdata_a !== shadow[a]) begin failures++; $display("FAIL write @%0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
