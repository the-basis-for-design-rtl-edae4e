// event_fifo: the event memory holding coincidence records for the host.
//
// A first-in first-out buffer of DEPTH records (A1, A2, dt), written by the
// coincidence controller and read by the host interface. The oldest record
// is always visible on rd_rec_o (first-word fall-through); rd_en_i removes
// it. A write and a read may happen in the same cycle. Writing while full
// and reading while empty are protocol errors, checked by assertions; the
// controller never writes when full_o is high.
//
// Storage is one DEPTH x record array (a dual-port RAM with asynchronous
// read). DEPTH must be a power of two.
//
// That coincidences are written into a memory is the paper's; the FIFO
// organisation and the depth of 1024 records are this design's choices.
module event_fifo
  import coinc_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear_i,
  input  logic          wr_en_i,
  input  record_t       wr_rec_i,
  input  logic          rd_en_i,
  output record_t       rd_rec_o,
  output logic          empty_o,
  output logic          full_o,
  output logic [AW:0]   count_o
);

  record_t       mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;

  wire do_wr = wr_en_i && !full_o;
  wire do_rd = rd_en_i && !empty_o;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_rec_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      count_o <= '0;
    end else if (clear_i) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      count_o <= '0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      count_o <= count_o + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  assign empty_o  = (count_o == '0);
  assign full_o   = (count_o == (AW+1)'(DEPTH));
  assign rd_rec_o = mem[rd_ptr];

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en_i |-> !full_o);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en_i |-> !empty_o);

endmodule
