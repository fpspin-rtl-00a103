// pspin_async_fifo: first-in first-out queue between two unrelated clocks,
// used where the application block meets Corundum. The NIC side runs at
// Corundum's 250 MHz, the PsPIN side (cluster and ingress/egress engines) at
// 40 MHz, so every stream and bus between the two passes through one of these.
//
// The classic Gray-code design: each side keeps a binary pointer one bit wider
// than the address and publishes it in Gray code from a register. The other
// side samples that register through two flip-flops, so only one bit can change
// per sample, and compares it with its own pointer. Empty means the pointers
// are equal. Full means they differ only in the top two Gray bits. Storage is
// an array written on the write clock and read without a clock on the read
// side. An entry is only read after its pointer update has crossed, so it has
// been stable for at least two read-clock cycles.
//
// Interface: valid/ready on both sides; the element type is a type parameter.
// Timing: a pushed entry becomes visible at the output 3 to 4 read-clock cycles
// later (two synchroniser stages plus the Gray register). A freed place becomes
// visible to the writer after the same number of write-clock cycles. DEPTH must be a
// power of two, at least 4. Each side has its own synchronous reset. Both
// resets must be asserted together, long enough for both clocks to see them.
//
// The paper gives only the two clock frequencies. The crossing scheme, the
// depths and the placement of the crossings are this design's own choices.
module pspin_async_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic wr_clk,
  input  logic wr_rst,
  input  T     in_data,
  input  logic in_valid,
  output logic in_ready,

  input  logic rd_clk,
  input  logic rd_rst,
  output T     out_data,
  output logic out_valid,
  input  logic out_ready
);
  localparam int unsigned AW = $clog2(DEPTH);

  T mem [DEPTH];

  logic [AW:0] wr_bin, wr_gray;            // write pointer, binary and Gray
  logic [AW:0] rd_bin, rd_gray;            // read pointer, binary and Gray
  logic [AW:0] rd_gray_s1, rd_gray_s2;     // read pointer seen by the writer
  logic [AW:0] wr_gray_s1, wr_gray_s2;     // write pointer seen by the reader

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ------------------------------------------------------------ write side
  wire push = in_valid && in_ready;
  assign in_ready = (wr_gray != {~rd_gray_s2[AW:AW-1], rd_gray_s2[AW-2:0]});

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wr_bin     <= '0;
      wr_gray    <= '0;
      rd_gray_s1 <= '0;
      rd_gray_s2 <= '0;
    end else begin
      rd_gray_s1 <= rd_gray;
      rd_gray_s2 <= rd_gray_s1;
      if (push) begin
        wr_bin  <= wr_bin + 1'b1;
        wr_gray <= bin2gray(wr_bin + 1'b1);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (push) mem[wr_bin[AW-1:0]] <= in_data;
  end

  // ------------------------------------------------------------- read side
  wire pop = out_valid && out_ready;
  assign out_valid = (rd_gray != wr_gray_s2);
  assign out_data  = mem[rd_bin[AW-1:0]];

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rd_bin     <= '0;
      rd_gray    <= '0;
      wr_gray_s1 <= '0;
      wr_gray_s2 <= '0;
    end else begin
      wr_gray_s1 <= wr_gray;
      wr_gray_s2 <= wr_gray_s1;
      if (pop) begin
        rd_bin  <= rd_bin + 1'b1;
        rd_gray <= bin2gray(rd_bin + 1'b1);
      end
    end
  end

  initial assert (DEPTH >= 4 && (1 << AW) == DEPTH);

endmodule
