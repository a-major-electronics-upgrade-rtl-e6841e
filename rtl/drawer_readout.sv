// drawer_readout: NECTAR readout controller of one drawer FPGA.
//
// Each pixel of a drawer has one NECTAR chip whose two channels hold the
// high-gain and low-gain signal in analogue memories of 1024 cells, written
// continuously at 1 GS/s. A trigger stops the sampling; the FPGA then has
// only the cells of a region of interest (ROI, usually 16 cells) digitised
// by the chip's 12-bit ADC and shifted out by its serializer, and afterwards
// restarts the sampling.
//
// This controller, on readout_start:
//   1. raises nec_stop to all 16 chips (sampling stops) and takes the cell
//      at which sampling stopped, stop_cell;
//   2. reads ROI_LEN cells starting ROI_OFFSET cells before stop_cell
//      (modulo 1024): for every cell it puts the cell number on nec_addr,
//      pulses nec_read, and waits until every chip shows nec_valid with its
//      high- and low-gain samples, which go into the event buffer;
//   3. drops nec_stop (sampling resumes) and sends the event out as
//      NPIX*ROI_LEN words {pixel, cell, high gain, low gain}, pixel by pixel,
//      on a valid/ready stream;
//   4. returns to idle. busy is high from readout_start to the last word.
//
// The memory depth, ROI length, 12-bit samples, two gains and stop-on-trigger
// are from the paper. The chip interface (address, read strobe, valid and
// parallel samples) is a simplification of this design: the paper gives no
// detail of the chip's control and serial link, so the deserialiser is not
// modelled, and a chip's conversion time shows only as the wait for
// nec_valid. ROI_OFFSET (the trigger latency in cells) and the word format
// are also this design's choices.
module drawer_readout
  import hess_pkg::*;
#(
  parameter int unsigned NPIX       = PIX_PER_DRAWER,
  parameter int unsigned DEPTH      = 1024,
  parameter int unsigned ROI_LEN    = 16,
  parameter int unsigned ROI_OFFSET = 40,
  parameter int unsigned ADC_W      = 12,
  localparam int unsigned CELL_W    = $clog2(DEPTH),
  localparam int unsigned PIX_W     = $clog2(NPIX),
  localparam int unsigned ROI_W     = $clog2(ROI_LEN),
  localparam int unsigned WORD_W    = PIX_W + ROI_W + 2 * ADC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              readout_start,
  output logic              busy,
  // NECTAR chips of the drawer
  output logic              nec_stop,
  input  logic [CELL_W-1:0] stop_cell,
  output logic [CELL_W-1:0] nec_addr,
  output logic              nec_read,
  input  logic [NPIX-1:0]   nec_valid,
  input  logic [ADC_W-1:0]  nec_hg [NPIX],
  input  logic [ADC_W-1:0]  nec_lg [NPIX],
  // event data
  output logic              ev_valid,
  input  logic              ev_ready,
  output logic [WORD_W-1:0] ev_data,
  output logic              ev_last
);

  typedef enum logic [2:0] {S_IDLE, S_STOP, S_REQ, S_WAIT, S_SEND} state_t;
  state_t state;

  logic [CELL_W-1:0] roi_start;
  logic [ROI_W-1:0]  cell_k;
  logic [PIX_W-1:0]  pix_o;
  logic [ROI_W-1:0]  cell_o;
  logic [2*ADC_W-1:0] buffer [NPIX * ROI_LEN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      nec_stop  <= 1'b0;
      nec_read  <= 1'b0;
      nec_addr  <= '0;
      roi_start <= '0;
      cell_k    <= '0;
      pix_o     <= '0;
      cell_o    <= '0;
    end else begin
      nec_read <= 1'b0;
      unique case (state)
        S_IDLE: if (readout_start) begin
          nec_stop <= 1'b1;
          state    <= S_STOP;
        end
        S_STOP: begin
          // stop_cell is valid once the chips have stopped
          roi_start <= CELL_W'(stop_cell - CELL_W'(ROI_OFFSET));
          cell_k    <= '0;
          state     <= S_REQ;
        end
        S_REQ: begin
          nec_addr <= CELL_W'(roi_start + CELL_W'(cell_k));
          nec_read <= 1'b1;
          state    <= S_WAIT;
        end
        S_WAIT: if (!nec_read && (&nec_valid)) begin
          if (cell_k == ROI_W'(ROI_LEN - 1)) begin
            nec_stop <= 1'b0;
            pix_o    <= '0;
            cell_o   <= '0;
            state    <= S_SEND;
          end else begin
            cell_k <= cell_k + 1'b1;
            state  <= S_REQ;
          end
        end
        S_SEND: if (ev_ready) begin
          if (cell_o == ROI_W'(ROI_LEN - 1)) begin
            cell_o <= '0;
            if (pix_o == PIX_W'(NPIX - 1)) state <= S_IDLE;
            else pix_o <= pix_o + 1'b1;
          end else begin
            cell_o <= cell_o + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Event buffer, written one cell of all pixels at a time.
  always_ff @(posedge clk) begin
    if (state == S_WAIT && !nec_read && (&nec_valid))
      for (int p = 0; p < int'(NPIX); p++)
        buffer[p * ROI_LEN + int'(cell_k)] <= {nec_hg[p], nec_lg[p]};
  end

  assign busy     = (state != S_IDLE);
  assign ev_valid = (state == S_SEND);
  assign ev_last  = ev_valid && pix_o == PIX_W'(NPIX - 1) && cell_o == ROI_W'(ROI_LEN - 1);
  assign ev_data  = {pix_o, cell_o, buffer[int'(pix_o) * ROI_LEN + int'(cell_o)]};

  // The chips are only addressed while sampling is stopped.
  a_read_only_when_stopped: assert property (@(posedge clk) disable iff (!rst_n)
    nec_read |-> nec_stop);

endmodule
