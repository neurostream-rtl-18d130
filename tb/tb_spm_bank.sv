// tb_spm_bank -- self-checking test of one SPM bank (spm_bank).
//
// Random reads and byte-masked writes against an array model at the
// default size (1024 words); read data must appear one cycle after the
// request, and a read must see a write of the previous cycle.
module tb_spm_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req, we;
  logic [3:0] be;
  logic [9:0] addr;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;

  spm_bank dut (.clk_i(clk), .req_i(req), .we_i(we), .be_i(be), .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [31:0] m [1024];
    req = 0; we = 0; be = 0; addr = 0; wdata = 0;
    // fill
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      req = 1; we = 1; be = 4'hF; addr = 10'(a); wdata = $urandom; m[a] = wdata;
    end
    for (int t = 0; t < 20000; t++) begin
      bit was_rd;
      logic [31:0] exp;
      @(negedge clk);
      req = ($urandom_range(0, 7) != 0); we = $urandom_range(0, 1); be = 4'($urandom);
      addr = (t % 2 == 0) ? 10'($urandom_range(0, 7)) : 10'($urandom);
      wdata = $urandom;
      was_rd = req && !we;
      exp = m[addr];
      if (req && we) for (int b = 0; b < 4; b++) if (be[b]) m[addr][8*b +: 8] = wdata[8*b +: 8];
      @(posedge clk); #1;
      if (was_rd) begin
        checks++;
        if (rdata !== exp) begin failures++; if (failures < 10) $display("FAIL read %0d got %h expected %h", addr, rdata, exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
