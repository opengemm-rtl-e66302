// tb_spm_bank: self-checking test of one scratchpad bank at full size
// (1056 x 64 bits). Writes every row with a random word, then does 4000
// random reads and writes against a reference array, checking that read
// data arrives one cycle after the request and stays until the next read.
module tb_spm_bank;
  localparam int DEPTH = 1056, WIDTH = 64;
  logic clk = 0;
  logic req = 0, we = 0; logic [10:0] addr = 0; logic [WIDTH-1:0] wd = 0, rd;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  spm_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wd), .rdata_o(rd));

  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [WIDTH-1:0] last;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); req = 1; we = 1; addr = 11'(i); wd = {$urandom, $urandom}; ref_mem[i] = wd;
    end
    @(negedge clk); req = 1; we = 0; addr = 0;
    @(negedge clk); req = 0; last = ref_mem[0];
    for (int i = 0; i < 4000; i++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      req = ($urandom_range(0, 3) != 0); we = ($urandom_range(0, 2) == 0); addr = 11'(a); wd = {$urandom, $urandom};
      @(negedge clk);
      checks++;
      if (req && !we) begin
        if (rd != ref_mem[a]) begin failures++; if (failures < 10) $display("FAIL read %0d", a); end
        last = ref_mem[a];
      end else if (rd != last) begin failures++; if (failures < 10) $display("FAIL read data not held"); end
      if (req && we) ref_mem[a] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
