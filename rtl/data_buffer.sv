// data_buffer -- queue of visit records for the host computer.
//
// A synchronous first-in first-out buffer of DEPTH visit records (parking_pkg::
// visit_rec_t: new member or not, card code, temporary card, slot found, slot index).
// The controller pushes one record per handled visitor; the host pops them at its own
// pace.  wr_en with the buffer full drops the record (even if a pop comes in the same cycle) and sets the sticky `overflow`
// flag, which only reset clears.  rd_data shows the oldest record whenever `empty` is
// 0; rd_en removes it.  Push and pop in the same cycle are both served.
//
// Interface: clk, rst (synchronous, active high); wr_en, wr_data in; rd_en in, rd_data,
// empty, full, count, overflow out.  A pushed record is visible on rd_data the cycle
// after the push.
//
// The published design places a data buffer between the identification results and
// the host computer and says no more; the FIFO, its depth, the record contents and the
// overflow behaviour are this design's.
module data_buffer
  import parking_pkg::*;
#(
  parameter  int unsigned DEPTH = 16,
  localparam int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_en,
  input  visit_rec_t               wr_data,
  input  logic                     rd_en,
  output visit_rec_t               rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [CW-1:0]            count,
  output logic                     overflow
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  visit_rec_t     mem [DEPTH];
  logic [AW-1:0]  wr_ptr, rd_ptr;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  assign empty   = (count == '0);
  assign full    = (int'(count) == DEPTH);
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wr_ptr <= inc(wr_ptr);
      if (do_rd) rd_ptr <= inc(rd_ptr);
      count <= count + CW'(do_wr) - CW'(do_rd);
      if (wr_en && full) overflow <= 1'b1;
    end
  end

  // Bus rule: the host must not pop an empty queue.
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) rd_en |-> !empty)
    else $error("data_buffer: read while empty");

endmodule
