// tb_sram_sp: random writes with byte enables and reads against a reference
// array; checks the one-cycle read latency and that rdata holds between reads.
module tb_sram_sp;
  localparam int unsigned WORDS = 256;
  logic clk = 0, en, we;
  logic [7:0] addr;
  logic [3:0] be;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [WORDS];
  logic [WORDS-1:0] known;
  int checks = 0, failures = 0;

  sram_sp #(.WORDS(WORDS), .DATA_W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    en = 0; we = 0; addr = 0; be = 0; wdata = 0; known = '0;
    for (int i = 0; i < WORDS; i++) ref_mem[i] = 0;
    // fill every word once so reads are defined
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 8'(i); be = 4'hf; wdata = $urandom;
      ref_mem[i] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = 1; addr = 8'($urandom); we = $urandom_range(0, 1) == 1;
      be = 4'($urandom); wdata = $urandom;
      if (we) begin
        for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
      end else begin
        exp = ref_mem[addr];
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata !== exp) begin
          failures++;
          $display("read mismatch addr %0d: %h vs %h", addr, rdata, exp);
        end
        // idle and write cycles must not disturb rdata
        @(negedge clk); en = 1; we = 1; addr = 8'($urandom); be = 4'hf; wdata = $urandom;
        ref_mem[addr] = wdata;
        @(negedge clk); en = 0;
        checks++;
        if (rdata !== exp) begin
          failures++;
          $display("rdata not held: %h vs %h", rdata, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
