// bv_ctrl: tile sequencer of the BitVert accelerator.
//
// Runs one job: a chunk of weight channels that share one precision (ncol
// stored bit columns per weight group).  The loops, outermost first, are
// channel block (32 channels), window tile (16 input windows), reduction
// group (16 activations) and bit column.  Each cycle of the RUN phase
// issues one bit column for all 32 channels; at the first column of a group
// it also reads a new activation group and the group's metadata.  The PEs
// keep their outputs (output-stationary) until all groups of a tile are
// done.  Then, after two cycles for the pipeline to empty, DRAIN shifts the
// array right 32 times and writes one output column per cycle to the output
// buffer, at the address of the channel's original index.
//
// Buffer layout (this design's choice):
//   weight word   w_base + (cb*kgroups + g)*ncol + j    (bit column j, MSB first)
//   metadata      m_base + cb*ceil(kgroups/2) + g/2     (one entry per 32 weights)
//   input word    i_base + wt*kgroups + g
//   channel index c_base + cb*32 + c
//
// Pipeline: buffer reads are issued in stage 0; buffers return data in stage
// 1, where the scheduler and the activation-sum generator register their
// results; the PEs accumulate in stage 2.  Outputs of this block are aligned
// to those stages.  A tile takes kgroups*ncol + 2 + 32 cycles; there are no
// stalls, as every group of a job has the same number of columns.
// With cfg.acc_out the write-back adds to the output buffer, so a reduction
// too long for the buffers can be split over several jobs.
// `start` is sampled in IDLE together with `cfg`; `done` pulses for one cycle
// at the end.  The sequencing is this design's own; the paper describes the
// dataflow (output-stationary, one column per cycle readout) but no controller.
module bv_ctrl
  import bv_pkg::*;
#(
  parameter int unsigned NCOLS = COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  bv_cfg_t           cfg,
  output logic              busy,
  output logic              done,
  // stage 0: buffer reads
  output logic              w_re,
  output logic [11:0]       w_raddr,
  output logic              m_re,
  output logic [9:0]        m_raddr,
  output logic              i_re,
  output logic [9:0]        i_raddr,
  output logic              c_re,
  output logic [11:0]       c_raddr,
  // stage 1: scheduler / activation sums
  output logic              sch_en,
  output logic              sch_first,
  output logic              act_load,
  // stage 2: PE array
  output logic              acc_en,
  output logic              shift,
  // output buffer write
  output logic              ob_we,
  output logic [9:0]        ob_tile,
  output logic [10:0]       ob_base,
  output logic [10:0]       ob_stride,
  output logic              ob_acc
);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_FLUSH, S_DRAIN, S_DONE} state_t;
  state_t  st;
  bv_cfg_t c;
  logic [6:0]  cb;
  logic [9:0]  wt, g;
  logic [3:0]  j;
  logic [5:0]  d;       // flush / drain counter
  logic        v1, f1, v2;

  // stage 0 addresses
  always_comb begin
    logic [9:0] mpc;    // metadata entries per channel block
    mpc     = (c.kgroups + 10'd1) >> 1;
    w_re    = (st == S_RUN);
    w_raddr = c.w_base + 12'((({5'd0, cb} * 12'(c.kgroups)) + 12'(g)) * 12'(c.ncol)) + 12'(j);
    i_re    = (st == S_RUN) && (j == '0);
    i_raddr = c.i_base + 10'(wt * c.kgroups) + g;
    m_re    = i_re;
    m_raddr = c.m_base + 10'({3'd0, cb} * mpc) + (g >> 1);
    c_re    = ((st == S_FLUSH) && (d == 6'd1)) || ((st == S_DRAIN) && (d != 6'(NCOLS - 1)));
    c_raddr = c.c_base + 12'(NCOLS) * 12'(cb) + 12'(NCOLS - 1)
              - ((st == S_DRAIN) ? 12'(d) + 12'd1 : 12'd0);
    shift   = (st == S_DRAIN);
    ob_we   = (st == S_DRAIN);
    ob_tile = wt;
    ob_base   = c.o_base;
    ob_stride = c.o_stride;
    ob_acc    = c.acc_out;
    busy    = (st != S_IDLE);
    done    = (st == S_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      c  <= '0;
      cb <= '0; wt <= '0; g <= '0; j <= '0; d <= '0;
      v1 <= 1'b0; f1 <= 1'b0; v2 <= 1'b0;
    end else begin
      v1 <= (st == S_RUN);
      f1 <= (st == S_RUN) && (j == '0);
      v2 <= v1;
      unique case (st)
        S_IDLE: if (start) begin
          c  <= cfg;
          cb <= '0; wt <= '0; g <= '0; j <= '0; d <= '0;
          st <= S_RUN;
        end
        S_RUN: begin
          if (j == c.ncol - 4'd1) begin
            j <= '0;
            if (g == c.kgroups - 10'd1) begin
              g  <= '0;
              d  <= '0;
              st <= S_FLUSH;
            end else g <= g + 10'd1;
          end else j <= j + 4'd1;
        end
        S_FLUSH: begin
          d <= d + 6'd1;
          if (d == 6'd1) begin
            d  <= '0;
            st <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          d <= d + 6'd1;
          if (d == 6'(NCOLS - 1)) begin
            d <= '0;
            if (wt == c.nwt - 10'd1) begin
              wt <= '0;
              if (cb == c.nchb - 7'd1) st <= S_DONE;
              else begin
                cb <= cb + 7'd1;
                st <= S_RUN;
              end
            end else begin
              wt <= wt + 10'd1;
              st <= S_RUN;
            end
          end
        end
        S_DONE:  st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign sch_en    = v1;
  assign sch_first = f1;
  assign act_load  = f1;
  assign acc_en    = v2;

  // a group needs at least two columns for the time-multiplexed BBS multiplier
  always_ff @(posedge clk) begin
    if (st == S_IDLE && start)
      assert (cfg.ncol >= 4'd2 && cfg.ncol <= 4'(WBITS) && cfg.kgroups != '0
              && cfg.nchb != '0 && cfg.nwt != '0)
        else $error("bv_ctrl: illegal job configuration");
  end

endmodule
