// fifo_writer: write port of the intermediate FIFO and interrupt generation.
//
// Each clock one word may be written to the external FIFO. A new DAQ cycle
// (pps_flag) has priority: its cycle word takes the next write slot and event
// words are held off (ev_ready low) for that clock, so that the data in the
// FIFO are split into PPS periods and stay in time order. Otherwise the event
// word offered by the readout sequencer is written (valid/ready handshake).
// If the FIFO reports full, the word is dropped and counted in dropped.
// The FPGA keeps its own count of the FIFO occupancy from its writes and the
// processor's read strobes (fifo_rd, one word per strobe).
// The interrupt to the processor is raised on every cycle word (held until
// irq_ack) and, while irq_threshold is non-zero, whenever the occupancy is at
// or above irq_threshold. Cycle-word priority and the two interrupt sources
// follow the paper; the word-level priority rule, the occupancy count, the
// acknowledge and the drop-and-count on full are this design's choices.
// Timing: fifo_wen/fifo_wdata are registered, one clock after the handshake.
// Reset: synchronous, active low.
`timescale 1ns / 1fs
module fifo_writer
  import tdc_pkg::*;
#(
  parameter int unsigned OCC_BITS = OCC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                pps_flag,
  input  logic [CYCLE_W-1:0]  cycle,
  input  word_t               ev_word,
  input  logic                ev_valid,
  output logic                ev_ready,
  output word_t               fifo_wdata,
  output logic                fifo_wen,
  input  logic                fifo_full,
  input  logic                fifo_rd,
  input  logic [OCC_BITS-1:0] irq_threshold,
  input  logic                irq_ack,
  output logic                irq,
  output logic [OCC_BITS-1:0] occupancy,
  output logic [15:0]         dropped
);

  logic               pps_pend;
  logic [CYCLE_W-1:0] pps_cycle;
  logic               wr;
  word_t              wr_word;
  logic               irq_pps;
  logic               do_write;

  assign ev_ready = !pps_pend;

  always_comb begin
    wr      = pps_pend || ev_valid;
    wr_word = pps_pend ? make_word(TAG_CYCLE, 32'(pps_cycle)) : ev_word;
  end

  assign do_write = wr && !fifo_full;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pps_pend   <= 1'b0;
      pps_cycle  <= '0;
      fifo_wen   <= 1'b0;
      fifo_wdata <= '0;
      occupancy  <= '0;
      dropped    <= '0;
      irq_pps    <= 1'b0;
    end else begin
      if (pps_flag) begin
        pps_pend  <= 1'b1;
        pps_cycle <= cycle;
      end else if (pps_pend) begin
        pps_pend <= 1'b0;
      end

      fifo_wen   <= do_write;
      fifo_wdata <= wr_word;
      if (wr && fifo_full && dropped != 16'hFFFF) dropped <= dropped + 1'b1;

      unique case ({do_write, fifo_rd && occupancy != '0})
        2'b10:   occupancy <= occupancy + 1'b1;
        2'b01:   occupancy <= occupancy - 1'b1;
        default: ;
      endcase

      if (pps_pend)     irq_pps <= 1'b1;
      else if (irq_ack) irq_pps <= 1'b0;
    end
  end

  assign irq = irq_pps || (irq_threshold != '0 && occupancy >= irq_threshold);

endmodule
