// sync_fifo -- synchronous first-in first-out buffer, used for FIFO buffer_1 (the L_qn_L and
// L_qn_R parts of each read window plus its schedule entry), FIFO buffer_2 (the
// variable-to-check messages L_qmn) and the small per-row-group result queues of the check node
// unit and the erase module.
//
// The head entry is visible on rd_data whenever empty is low (first-word fall-through); rd_en
// pops it. A push and a pop may happen in the same cycle. Pushing when full or popping when
// empty is a usage error and is caught by assertions. The paper names the buffers but not
// their depth or protocol; both are this design's choice.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 32,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr_en) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (rd_en) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(wr_en) - (AW+1)'(rd_en);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full && !rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
