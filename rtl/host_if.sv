// host_if: the interfacing unit between the spectrometer and the host PC.
//
// A small register file on a simple synchronous bus. The host writes the
// run bit, the two lower thresholds and the coincidence window, and reads
// the recorded coincidences one record at a time from the event memory.
// Register map (word addresses, see coinc_pkg::reg_addr_e):
//   0 CTRL    W bit0 run, bit1 flush (one-cycle pulse); R bit0 run
//   1 THRESH1 lower threshold of channel 1 (reset 0)
//   2 THRESH2 lower threshold of channel 2 (reset 0)
//   3 WINDOW  coincidence window W in clock periods (reset 40 = 500 ns)
//   4 STATUS  bit31 overflow (sticky, cleared by flush), bit30 empty,
//             bits 15:0 number of stored records
//   5 DATA_A  {A2, A1} of the oldest record, 16 bits each, zero-extended
//   6 DATA_DT dt of the oldest record; this read removes the record
// A record is read as DATA_A then DATA_DT. Reading the data registers while
// the memory is empty returns zero and removes nothing.
//
// Bus timing: wr_i and rd_i are one-cycle strobes with addr_i; write data
// take effect on that edge; read data appear on rdata_o with rvalid_o one
// cycle after rd_i. Flush restarts the time base, empties both event stores
// and the event memory, and clears the overflow flag.
//
// The paper names this unit and says all parameters are set by software;
// the bus, the register map and the reset values are this design's own.
module host_if
  import coinc_pkg::*;
#(
  parameter int unsigned CNT_W = 11
) (
  input  logic               clk,
  input  logic               rst_n,
  // host bus
  input  logic [HOST_AW-1:0] addr_i,
  input  logic               wr_i,
  input  logic [HOST_DW-1:0] wdata_i,
  input  logic               rd_i,
  output logic [HOST_DW-1:0] rdata_o,
  output logic               rvalid_o,
  // configuration
  output logic               run_o,
  output logic               flush_o,
  output amp_t               thresh1_o,
  output amp_t               thresh2_o,
  output dt_t                window_o,
  // event memory and status
  input  record_t            rec_i,
  input  logic               empty_i,
  input  logic [CNT_W-1:0]   count_i,
  input  logic               drop_i,
  output logic               pop_o
);

  logic overflow_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_o     <= 1'b0;
      flush_o   <= 1'b0;
      thresh1_o <= '0;
      thresh2_o <= '0;
      window_o  <= dt_t'(DEFAULT_WINDOW);
    end else begin
      flush_o <= 1'b0;
      if (wr_i) begin
        unique case (reg_addr_e'(addr_i))
          REG_CTRL: begin
            run_o   <= wdata_i[0];
            flush_o <= wdata_i[1];
          end
          REG_THRESH1: thresh1_o <= wdata_i[SAMPLE_W-1:0];
          REG_THRESH2: thresh2_o <= wdata_i[SAMPLE_W-1:0];
          REG_WINDOW:  window_o  <= wdata_i[DT_W-1:0];
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       overflow_q <= 1'b0;
    else if (flush_o) overflow_q <= 1'b0;
    else if (drop_i)  overflow_q <= 1'b1;
  end

  assign pop_o = rd_i && (reg_addr_e'(addr_i) == REG_DATA_DT) && !empty_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata_o  <= '0;
      rvalid_o <= 1'b0;
    end else begin
      rvalid_o <= rd_i;
      if (rd_i) begin
        rdata_o <= '0;
        unique case (reg_addr_e'(addr_i))
          REG_CTRL:    rdata_o[0]            <= run_o;
          REG_THRESH1: rdata_o[SAMPLE_W-1:0] <= thresh1_o;
          REG_THRESH2: rdata_o[SAMPLE_W-1:0] <= thresh2_o;
          REG_WINDOW:  rdata_o[DT_W-1:0]     <= window_o;
          REG_STATUS: begin
            rdata_o[31]      <= overflow_q;
            rdata_o[30]      <= empty_i;
            rdata_o[15:0]    <= 16'(count_i);
          end
          REG_DATA_A: if (!empty_i) begin
            rdata_o[SAMPLE_W-1:0]     <= rec_i.a1;
            rdata_o[16+:SAMPLE_W]     <= rec_i.a2;
          end
          REG_DATA_DT: if (!empty_i) rdata_o[DT_W-1:0] <= rec_i.dt;
          default: ;
        endcase
      end
    end
  end

  a_one_strobe: assert property (@(posedge clk) disable iff (!rst_n) !(wr_i && rd_i));

endmodule
