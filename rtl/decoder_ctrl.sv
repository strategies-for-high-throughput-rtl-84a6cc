// decoder_ctrl: block- and layer-loop scheduler of the decoder.
//
// After start it issues one block slot per cycle as a pipeline token (tok_a, the address
// stage): the layer, the slot within the layer, the block column and shift looked up in
// the code-parameter ROM, and first/last/valid flags. Layers are grouped in superlayers
// of SL = 6 layers. In the pipelined (2x) schedule the GNPU array works through the SL
// layers of a superlayer back to back while the LNPU array follows one layer behind;
// at the end of each superlayer one layer time (JB cycles) of bubbles lets the LNPU
// finish the last layer before the next superlayer starts, because the stagger of the
// index matrix only holds between adjacent layers inside a superlayer. A superlayer
// therefore takes (SL + 1) * JB cycles. In the non-pipelined (1x) schedule every layer
// is followed by a bubble, 2 * SL * JB cycles per superlayer. One iteration covers all
// MB / SL superlayers; the iteration count comes from the ROM. When the last token has
// left the pipeline (JB + 1 stages after issue), done pulses for one cycle.
//
// Early termination: stop (a pulse, taken only while tokens are still being issued)
// ends the run at once. It raises flush for that cycle, so that the tokens already
// issued are dropped and nothing more is written; done follows one cycle later.
//
// Interface: start is taken when idle; busy is high from the cycle after start until
// done. iter counts the iterations whose tokens have all been issued. The schedule (Figs. of the block- and layer-level pipeline timing in the paper)
// is the paper's; the start/busy/done handshake is this design's choice.
module decoder_ctrl
  import ldpc_pkg::*;
#(
  parameter bit PIPE2X = 1'b1,   // 1: 2-layer pipelined (2x) schedule, 0: 1x schedule
  parameter int TMAX_P = TMAX
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   stop,          // stop decoding (early termination)
  output logic   flush,         // drop the tokens in flight this cycle
  output logic   busy,
  output logic   done,
  output token_t tok_a,
  output logic   bubble,        // current cycle is an idle GNPU slot
  output logic [7:0] iter
);

  localparam int NSL   = MB / SL;                    // superlayers per iteration
  localparam int NSLOT = PIPE2X ? SL + 1 : 2 * SL;   // layer slots per superlayer

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;
  state_t state;

  logic [$clog2(NSL+1)-1:0]   sl;
  logic [$clog2(NSLOT+1)-1:0] slot;
  logic [BLK_W-1:0]           blk;
  logic [JB:0]                pipe_v;   // valid flags of the JB+1 stages after issue

  logic [COL_W-1:0]   rom_col;
  logic [SHIFT_W-1:0] rom_shift;
  logic               rom_bv;
  logic [15:0]        code_len;
  logic [7:0]         t_max;
  logic [LAYER_W-1:0] layer;
  logic               in_bubble, last_cycle;

  always_comb begin
    if (PIPE2X) begin
      in_bubble = (int'(slot) >= SL);
      layer     = LAYER_W'(int'(sl) * SL + int'(slot));
    end else begin
      in_bubble = slot[0];
      layer     = LAYER_W'(int'(sl) * SL + int'(slot) / 2);
    end
    if (in_bubble) layer = '0;
  end

  param_rom #(.TMAX_P(TMAX_P)) u_rom (
    .layer, .blk, .col(rom_col), .shift(rom_shift), .bv(rom_bv),
    .code_len, .t_max
  );

  always_comb begin
    tok_a       = '0;
    tok_a.valid = (state == S_RUN) && !in_bubble;
    tok_a.bv    = rom_bv;
    tok_a.first = (blk == '0);
    tok_a.last  = (int'(blk) == JB - 1);
    tok_a.iter0 = (iter == '0);
    tok_a.layer = layer;
    tok_a.blk   = blk;
    tok_a.col   = rom_col;
    tok_a.shift = rom_shift;
  end

  assign bubble     = (state == S_RUN) && in_bubble;
  assign last_cycle = (int'(blk) == JB - 1) && (int'(slot) == NSLOT - 1) &&
                      (int'(sl) == NSL - 1) && (iter == t_max - 8'd1);
  assign busy       = (state != S_IDLE);
  assign flush      = (state == S_RUN) && stop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      sl     <= '0;
      slot   <= '0;
      blk    <= '0;
      iter   <= '0;
      pipe_v <= '0;
      done   <= 1'b0;
    end else begin
      done   <= 1'b0;
      pipe_v <= flush ? '0 : {pipe_v[JB-1:0], tok_a.valid};
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          sl    <= '0;
          slot  <= '0;
          blk   <= '0;
          iter  <= '0;
        end
        S_RUN: begin
          if (last_cycle || flush) state <= S_DRAIN;
          if (int'(blk) == JB - 1) begin
            blk <= '0;
            if (int'(slot) == NSLOT - 1) begin
              slot <= '0;
              if (int'(sl) == NSL - 1) begin
                sl   <= '0;
                iter <= iter + 8'd1;
              end else begin
                sl <= sl + 1'b1;
              end
            end else begin
              slot <= slot + 1'b1;
            end
          end else begin
            blk <= blk + 1'b1;
          end
        end
        S_DRAIN: if (pipe_v == '0) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
