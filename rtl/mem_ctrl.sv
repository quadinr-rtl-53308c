// mem_ctrl: memory controller that schedules the layer pipeline.
//
// The accelerator is a chain of NSTAGE layer stages (input layer, hidden
// linear layers, output layer). The controller runs the chain on a fixed
// cycle count rather than on handshakes: time is cut into epochs of EPOCH
// cycles, and in epoch e stage s works on pixel e-s. Within an epoch a stage
// reads one weight row per cycle, rows 0..ROWS-1 at cycles 0..ROWS-1 of the
// epoch (row_addr is the cycle count), and must have written all its outputs
// into the next stage's intermediate RAM before the epoch ends. Each
// intermediate RAM has two banks: in epoch e every stage writes bank e mod 2
// of the RAM after it and reads bank (e+1) mod 2 of its own, which the stage
// before it filled during epoch e-1.
//
// A group of num_pixels pixels takes num_pixels + NSTAGE - 1 epochs; a new
// pixel enters every EPOCH cycles once the pipeline is full.
//
// The paper says a dedicated memory control module orchestrates pipeline
// execution based on internal clock cycles and drives the weight/bias and
// intermediate memories; the epoch scheme, the ping-pong banks and the
// start/done interface are this design's own.
//
// Interface: start (with num_pixels > 0, while idle) begins a group and
// pulses coord_clear; busy is high until done pulses for one cycle after the
// last epoch. coord_advance pulses at the last cycle of every epoch in which
// the input layer worked.
module mem_ctrl
  import quadinr_pkg::*;
#(
  parameter int unsigned NSTAGE   = NUM_HIDDEN + 2,
  parameter int unsigned ROWS_HID = HIDDEN_DIM,
  parameter int unsigned ROWS_OUT = OUT_DIM,
  parameter int unsigned EPOCH    = 270,
  parameter int unsigned PIX_W    = clog2_min1(IMG_W * IMG_H + 1),
  localparam int unsigned CW      = clog2_min1(EPOCH),
  localparam int unsigned EW      = PIX_W + 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [PIX_W-1:0] num_pixels,
  output logic             busy,
  output logic             done,
  output logic [CW-1:0]    cnt,
  output logic             wr_bank,
  output logic             rd_bank,
  output logic             stage_active [NSTAGE],
  output logic [PIX_W-1:0] stage_pix    [NSTAGE],
  output logic             row_en       [NSTAGE],
  output logic [CW-1:0]    row_addr,
  output logic             coord_clear,
  output logic             coord_advance
);

  logic [EW-1:0]    epoch;
  logic [PIX_W-1:0] npix;
  logic             last_cyc;

  assign last_cyc = busy && (int'(cnt) == int'(EPOCH) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      cnt   <= '0;
      epoch <= '0;
      npix  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && num_pixels != '0) begin
          busy  <= 1'b1;
          cnt   <= '0;
          epoch <= '0;
          npix  <= num_pixels;
        end
      end else if (last_cyc) begin
        cnt <= '0;
        if (epoch == EW'(npix) + EW'(NSTAGE - 2)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          epoch <= epoch + 1'b1;
        end
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  assign coord_clear = !busy && start && num_pixels != '0;
  assign wr_bank     = epoch[0];
  assign rd_bank     = ~epoch[0];
  assign row_addr    = cnt;

  for (genvar s = 0; s < NSTAGE; s++) begin : g_stage
    localparam int unsigned ROWS = (s == NSTAGE - 1) ? ROWS_OUT : ROWS_HID;
    assign stage_active[s] = busy && (epoch >= EW'(s)) && (epoch < EW'(s) + EW'(npix));
    assign stage_pix[s]    = PIX_W'(epoch - EW'(s));
    assign row_en[s]       = stage_active[s] && (int'(cnt) < int'(ROWS));
  end

  assign coord_advance = last_cyc && stage_active[0];

endmodule
