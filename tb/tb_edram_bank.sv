// tb_edram_bank -- the eDRAM bank model at its default size (2048 rows x 128
// columns, 4096 x 64-bit logical words). Checks write/read of both column
// halves at random addresses, the one-cycle read latency, that a row left
// unactivated longer than RETENTION reads back corrupted with retention_err,
// and that refreshing the row in time keeps it intact. RETENTION is lowered
// to 500 cycles so the decay happens within the test.
module tb_edram_bank;
  localparam int RET = 500;
  logic clk = 0, rst_n = 0, we = 0, re = 0, ref_en = 0;
  logic [11:0] addr = 0;
  logic [63:0] wdata = 0, rdata;
  logic retention_err;
  logic [63:0] model [4096];
  int checks = 0, failures = 0;

  edram_bank #(.RETENTION(RET)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("[%0t] FAIL %s", $time, what);
    end
  endtask

  task automatic write(input logic [11:0] a, input logic [63:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(negedge clk); we = 0;
    model[a] = d;
  endtask

  task automatic read(input logic [11:0] a, output logic [63:0] d, output logic err);
    @(negedge clk); re = 1; addr = a;
    @(negedge clk); re = 0; d = rdata; err = retention_err;
  endtask

  task automatic refresh(input logic [11:0] a);
    @(negedge clk); ref_en = 1; addr = a;
    @(negedge clk); ref_en = 0;
  endtask

  initial begin
    logic [63:0] d; logic e;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // fresh accesses: data correct, no error
    for (int i = 0; i < 200; i++) begin
      logic [11:0] a;
      a = 12'($urandom);
      write(a, {$urandom, $urandom});
      write(a ^ 12'd1, {$urandom, $urandom});   // other half of the same row
      read(a, d, e);
      check(d == model[a] && !e, "read back");
      read(a ^ 12'd1, d, e);
      check(d == model[a ^ 12'd1] && !e, "read back other column half");
    end
    // decay: write, wait past retention, read -> corrupted + error
    write(12'd100, 64'h0123_4567_89ab_cdef);
    repeat (RET + 20) @(negedge clk);
    read(12'd100, d, e);
    check(e && d == ~64'h0123_4567_89ab_cdef, "decayed row flagged");
    // refresh keeps data: refresh the other half's address (same row) every RET/2
    write(12'd200, 64'hfeed_beef_0000_1111);
    for (int k = 0; k < 6; k++) begin
      repeat (RET / 2) @(negedge clk);
      refresh(12'd201);
    end
    read(12'd200, d, e);
    check(!e && d == 64'hfeed_beef_0000_1111, "refreshed row intact");
    // a refresh of a different row does not help
    write(12'd300, 64'h1);
    for (int k = 0; k < 3; k++) begin
      repeat (RET / 2) @(negedge clk);
      refresh(12'd302);
    end
    read(12'd300, d, e);
    check(e, "refresh of another row does not restore");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
