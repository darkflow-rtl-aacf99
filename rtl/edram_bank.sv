// edram_bank -- BEHAVIOURAL MODEL of one eDRAM bank macro (process-specific
// memory, not synthesizable intent).
//
// Physical organisation as in the paper: ROWS rows x 128 columns with a 2:1
// column multiplexer, so the bank is addressed as 2*ROWS logical words of
// 64 bits; logical address a sits in physical row a>>1, column half a[0].
// Top and bottom banks of one FIFO side receive the upper and lower 64-bit
// halves of each 128-bit word with the same address and commands.
//
// Retention: each physical row remembers the cycle of its last activation.
// A write, a read or a refresh activates (and so restores) the row. A read of
// a row last activated more than RETENTION cycles ago returns the inverted
// word and pulses retention_err, so a refresh scheme that lets data decay is
// caught by a checking testbench. RETENTION defaults to 125000 cycles,
// 250 us at 2 ns, the paper's modelling assumption for eDRAM retention.
//
// Timing: one command per cycle (we, re or ref; the controller never issues
// two). Reads are synchronous: rdata is valid the cycle after re and holds
// until the next read.
module edram_bank #(
  parameter int unsigned ROWS      = 2048,
  parameter int unsigned WIDTH     = 64,
  parameter int unsigned RETENTION = 125000
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         we,
  input  logic                         re,
  input  logic                         ref_en,
  input  logic [$clog2(2*ROWS)-1:0]    addr,
  input  logic [WIDTH-1:0]             wdata,
  output logic [WIDTH-1:0]             rdata,
  output logic                         retention_err
);
  localparam int unsigned RW = $clog2(ROWS);

  logic [WIDTH-1:0] cells [ROWS][2];
  logic [31:0]      stamp [ROWS];
  logic [31:0]      cycle;
  logic [RW-1:0]    row;
  logic             col;

  assign row = addr[RW:1];
  assign col = addr[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycle         <= '0;
      rdata         <= '0;
      retention_err <= 1'b0;
    end else begin
      cycle         <= cycle + 1'b1;
      retention_err <= 1'b0;
      if (re) begin
        if ((cycle - stamp[row]) > RETENTION) begin
          rdata         <= ~cells[row][col];
          retention_err <= 1'b1;
        end else begin
          rdata <= cells[row][col];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (we) cells[row][col] <= wdata;
    if (we || re || ref_en) stamp[row] <= cycle;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) stamp[r] = '0;
  end
endmodule
