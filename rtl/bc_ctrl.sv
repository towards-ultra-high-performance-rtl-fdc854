// bc_ctrl -- hierarchical controller of the three-phase, batch-interleaved schedule.
//
// The whole network runs on one FFT structure in a fixed loop nest (the paper's Fig. 4):
//   for each layer                                   (outer loop)
//     phase 1: for each picture, row, input word w:  FFT      spectrum[w]  <- FFT(feature[w])
//     phase 2: for each picture, row, output block i, input word w:
//                                                    MAC      acc[i/G]    += W[i,w] o spectrum[w]
//     phase 3: for each picture, row, output word u: IFFT     feature[u]  <- relu(IFFT(acc[u]) + b)
// A phase works through the whole batch before the next phase starts, so the deep pipeline
// stays full; between phases the controller waits DRAIN cycles for the pipeline to empty
// (the engine changes direction and phase 3 overwrites the phase-1 inputs in place).
// G = N/k blocks share a word.  rows > 1 runs a lowered CONV layer: every row of the lowered
// input matrix is one input vector.
//
// Addressing (words of N values): picture b owns PIC_WORDS words from b*PIC_WORDS in the
// feature, spectrum and accumulation memories.  Row r of a layer reads input words at
// r*in_words and writes output words at r*out_words inside that area.  Weight word of
// (i, w) is wbase + i*in_words + w; bias word of u is bbase + u.
//
// Interface: the host writes layer records through cfg_we/cfg_addr/cfg_wdata while idle, then
// pulses start with n_layers and batch.  One operation is issued per cycle on op_* (registered),
// busy is high until the last phase has drained, done pulses once at the end.
// From the paper: the loop order, three phases, batch interleaving and in-place outputs.
// Chosen here: the record format, the address map, the fixed drain wait, row loop for CONV.
module bc_ctrl
  import bc_pkg::*;
#(
  parameter int MAX_LAYERS = 16,
  parameter int BATCH      = 64,
  parameter int PIC_WORDS  = 32,
  parameter int DRAIN      = 14,
  parameter int AW         = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // layer table
  input  logic                          cfg_we,
  input  logic [$clog2(MAX_LAYERS)-1:0] cfg_addr,
  input  layer_cfg_t                    cfg_wdata,
  // run control
  input  logic                          start,
  input  logic [$clog2(MAX_LAYERS):0]   n_layers,
  input  logic [$clog2(BATCH):0]        batch,
  output logic                          busy,
  output logic                          done,
  // operation stream
  output logic                          op_valid,
  output op_e                           op_kind,
  output logic [2:0]                    op_log2k,
  output logic [6:0]                    op_scale,
  output logic                          op_relu,
  output logic [4:0]                    op_shift,
  output logic                          op_clr,
  output logic                          op_last,
  output logic [6:0]                    op_grp,
  output logic [AW-1:0]                 op_rd_addr,
  output logic [AW-1:0]                 op_w_addr,
  output logic [AW-1:0]                 op_b_addr,
  output logic [AW-1:0]                 op_wr_addr
);

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_RUN, S_DRAIN, S_DONE
  } state_e;

  localparam int LW = $clog2(MAX_LAYERS);

  layer_cfg_t cfg_tab [MAX_LAYERS];
  always_ff @(posedge clk) begin
    if (cfg_we && !busy) cfg_tab[cfg_addr] <= cfg_wdata;
  end

  state_e     state;
  op_e        phase;
  layer_cfg_t cfg;
  logic [LW:0]                layer, nl;
  logic [$clog2(BATCH):0]     nb, pic;
  logic [7:0]                 row;
  logic [9:0]                 blk;       // i (phase 2) or u (phase 3)
  logic [7:0]                 wrd;       // w
  logic [9:0]                 owords;
  logic [AW-1:0]              pic_base, in_base, out_base, wrow;
  logic [$clog2(DRAIN+1)-1:0] drain_cnt;

  // derived per-layer values
  logic [6:0] gmask;            // G-1
  logic [6:0] blk_in_word;
  assign gmask       = 7'((1 << (LOG2N - int'(cfg.log2k))) - 1);
  assign blk_in_word = 7'(blk) & gmask;

  // end-of-loop conditions of the current operation
  logic last_w, last_blk, last_row, last_pic, last_op;
  assign last_w   = (wrd == cfg.in_words - 8'd1);
  assign last_blk = (phase == OP_MAC)  ? (blk == cfg.out_blocks - 10'd1) :
                    (phase == OP_IFFT) ? (blk == owords - 10'd1) : 1'b1;
  assign last_row = (row == cfg.rows - 8'd1);
  assign last_pic = (pic == nb - 1'b1);
  assign last_op  = last_pic && last_row && last_blk && ((phase == OP_IFFT) || last_w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      phase     <= OP_FFT;
      cfg       <= '0;
      layer     <= '0;
      nl        <= '0;
      nb        <= '0;
      pic       <= '0;
      row       <= '0;
      blk       <= '0;
      wrd       <= '0;
      owords    <= '0;
      pic_base  <= '0;
      in_base   <= '0;
      out_base  <= '0;
      wrow      <= '0;
      drain_cnt <= '0;
      done      <= 1'b0;
      op_valid  <= 1'b0;
      op_kind   <= OP_FFT;
      op_log2k  <= '0;
      op_scale  <= '0;
      op_relu   <= 1'b0;
      op_shift  <= '0;
      op_clr    <= 1'b0;
      op_last   <= 1'b0;
      op_grp    <= '0;
      op_rd_addr <= '0;
      op_w_addr  <= '0;
      op_b_addr  <= '0;
      op_wr_addr <= '0;
    end else begin
      done     <= 1'b0;
      op_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start && n_layers != 0 && batch != 0) begin
            nl    <= n_layers;
            nb    <= batch;
            layer <= '0;
            state <= S_LOAD;
          end
        end

        S_LOAD: begin
          cfg      <= cfg_tab[layer[LW-1:0]];
          owords   <= out_words(cfg_tab[layer[LW-1:0]]);
          phase    <= OP_FFT;
          pic      <= '0;
          row      <= '0;
          blk      <= '0;
          wrd      <= '0;
          pic_base <= '0;
          in_base  <= '0;
          out_base <= '0;
          wrow     <= cfg_tab[layer[LW-1:0]].wbase;
          state    <= S_RUN;
        end

        S_RUN: begin
          // issue the current operation
          op_valid <= 1'b1;
          op_kind  <= phase;
          op_log2k <= cfg.log2k;
          op_relu  <= cfg.relu;
          op_shift <= cfg.mac_shift;
          op_scale <= (phase == OP_IFFT) ? cfg.ifft_scale : cfg.fft_scale;
          op_clr   <= (blk_in_word == 7'd0) && (wrd == 8'd0);
          op_last  <= last_w && ((blk_in_word == gmask) || last_blk);
          op_grp   <= blk_in_word;
          unique case (phase)
            OP_FFT: begin
              op_rd_addr <= in_base + AW'(wrd);
              op_wr_addr <= in_base + AW'(wrd);
            end
            OP_MAC: begin
              op_rd_addr <= in_base + AW'(wrd);
              op_w_addr  <= wrow + AW'(wrd);
              op_wr_addr <= out_base + AW'(blk >> (LOG2N - int'(cfg.log2k)));
            end
            default: begin
              op_rd_addr <= out_base + AW'(blk);
              op_b_addr  <= AW'(cfg.bbase) + AW'(blk);
              op_wr_addr <= out_base + AW'(blk);
            end
          endcase

          // advance the loop nest
          if (phase != OP_IFFT && !last_w) begin
            wrd <= wrd + 8'd1;
          end else begin
            wrd <= '0;
            if (phase == OP_MAC) wrow <= wrow + AW'(cfg.in_words);
            if (!last_blk) begin
              blk <= blk + 10'd1;
            end else begin
              blk  <= '0;
              wrow <= cfg.wbase;
              if (!last_row) begin
                row      <= row + 8'd1;
                in_base  <= in_base + AW'(cfg.in_words);
                out_base <= out_base + AW'(owords);
              end else begin
                row      <= '0;
                pic      <= pic + 1'b1;
                in_base  <= pic_base + AW'(PIC_WORDS);
                out_base <= pic_base + AW'(PIC_WORDS);
                pic_base <= pic_base + AW'(PIC_WORDS);
              end
            end
          end
          if (last_op) begin
            state     <= S_DRAIN;
            drain_cnt <= '0;
          end
        end

        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (int'(drain_cnt) == DRAIN - 1) begin
            pic      <= '0;
            row      <= '0;
            blk      <= '0;
            wrd      <= '0;
            pic_base <= '0;
            in_base  <= '0;
            out_base <= '0;
            wrow     <= cfg.wbase;
            unique case (phase)
              OP_FFT:  begin phase <= OP_MAC;  state <= S_RUN; end
              OP_MAC:  begin phase <= OP_IFFT; state <= S_RUN; end
              default: begin
                if (layer + 1'b1 == nl) state <= S_DONE;
                else begin
                  layer <= layer + 1'b1;
                  state <= S_LOAD;
                end
              end
            endcase
          end
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
