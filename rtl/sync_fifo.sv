// sync_fifo: single-clock FIFO used for the input pixel FIFO, the keypoint
// FIFO of each pyramid level and the descriptor FIFO.
//
// A circular array of DEPTH words with write and read pointers and an
// occupancy counter. The head word is visible on rd_data whenever empty is
// low (first-word fall-through); rd_en pops it. wr_en is ignored while full
// and rd_en while empty, so callers may count a write attempted while full
// as an overflow. Simultaneous read and write keep the count. Reset empties
// the FIFO. The paper names these FIFOs but gives no depth or interface;
// depths are set by the instantiating module.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count   // occupancy, for monitoring
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign empty   = (count == 0);
  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end

  // Reading an empty FIFO or writing a full one is tolerated but never done
  // by the accelerator's own logic on the read side.
  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);

endmodule
