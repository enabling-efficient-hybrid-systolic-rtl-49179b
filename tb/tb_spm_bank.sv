// Self-checking test of spm_bank: random byte-enabled writes and reads
// against a reference array; checks the one-cycle read latency and that the
// read data register holds its value across writes.
module tb_spm_bank;
  localparam int Rows = 64;
  logic clk = 0, req, we;
  logic [5:0] addr;
  logic [31:0] wdata, rdata, ref_mem [Rows], last;
  logic [3:0] be;
  int checks = 0, failures = 0;

  spm_bank #(.Rows(Rows)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr),
                               .wdata_i(wdata), .be_i(be), .rdata_o(rdata));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; be = 0;
    // initialise every row
    for (int r = 0; r < Rows; r++) begin
      @(negedge clk); req = 1; we = 1; addr = 6'(r); be = 4'hF; wdata = $urandom; ref_mem[r] = wdata;
    end
    @(negedge clk); req = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      req = 1; addr = 6'($urandom_range(Rows - 1)); we = $urandom_range(1);
      be = 4'($urandom); wdata = $urandom;
      if (we) for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
      if (!we) begin
        last = ref_mem[addr];
        @(negedge clk); req = 0;
        checks++;
        if (rdata !== last) begin failures++; $display("read mismatch row %0d: %h vs %h", addr, rdata, last); end
        // a write must not disturb the read register
        req = 1; we = 1; be = 4'hF; addr = 6'($urandom_range(Rows - 1)); wdata = $urandom; ref_mem[addr] = wdata;
        @(negedge clk); req = 0;
        checks++;
        if (rdata !== last) begin failures++; $display("read data lost on write"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
