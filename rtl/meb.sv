// meb: multi-event circular buffers of one 16-channel lane.
//
// The buffer memory is split into NBUF buffers.  One of them is active and is
// written continuously as a circular buffer of LEN t-samples, LEN = 64 << len_sel
// (64 ... 4096 t-samples, i.e. a drift window of 25.6 us ... 1.64 ms).  Each
// t-sample owns a slot of up to 16 words plus a word count, so a slot holds a
// t-sample of any format (16 words in raw mode, 4 to 16 in compression 4, 8 in
// compression 2); the count lets the readout send only the words that were
// written, which is where compression shortens the readout.
//
// When a trigger arrives the active buffer is frozen at the end of the
// t-sample being written (at the next wr_first) and writing moves on to the
// next buffer of the ring, so no sample is lost.  Frozen buffers are read out
// oldest first, each from its oldest t-sample to its newest, one word per
// clock while rd_ready is high; rd_last marks the last word of a buffer,
// after which the buffer is released and can be written again.  A trigger that
// arrives while no buffer is free (or while a freeze is still pending) is not
// taken and trig_lost pulses: the board runs without dead time until the DAQ
// falls behind.  free_avail tells whether a trigger would be taken now.
//
// Interface: write side wr_valid/wr_word/wr_first (one word per clock at most,
// no back-pressure); trigger (one-clock pulse); read side valid/ready.
// Timing: rd_data is read combinationally from the memory.
// From the paper: circular multi-event buffers, seven lengths from 64 to 4096
// t-samples, freeze on trigger, switch to the next free buffer, release after
// readout.  This design's choices: NBUF = 4 buffers, the slot-per-t-sample
// organisation, freezing at a t-sample boundary, and dropping triggers when
// no buffer is free.
module meb
  import sd_pkg::*;
#(
  parameter int unsigned NBUF       = 4,
  parameter int unsigned LEN_MAX    = 4096,
  parameter int unsigned SLOT_WORDS = NCH_CHIP
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [2:0]  len_sel,
  input  logic        wr_valid,
  input  word_t       wr_word,
  input  logic        wr_first,
  input  logic        trigger,
  output logic        free_avail,
  output logic        trig_lost,
  output logic [$clog2(NBUF):0] frozen_cnt,
  output logic        rd_valid,
  output word_t       rd_data,
  output logic        rd_last,
  input  logic        rd_ready
);
  localparam int unsigned BW = $clog2(NBUF);
  localparam int unsigned SW = $clog2(LEN_MAX);
  localparam int unsigned IW = $clog2(SLOT_WORDS);

  typedef logic [SW-1:0] slot_t;

  word_t        mem     [NBUF * LEN_MAX * SLOT_WORDS];
  logic [IW:0]  cnt_mem [NBUF * LEN_MAX];

  logic [BW-1:0] act_q, rd_buf_q;
  logic [BW:0]   nfrozen_q;
  slot_t         slot_q [NBUF];
  logic          wrap_q [NBUF];
  slot_t         mask_q [NBUF];
  logic          started_q, pend_q;
  logic [IW:0]   idx_q;

  slot_t         cur_mask;
  always_comb begin
    int unsigned lg;
    lg = MEB_LEN_MIN_LOG2 + ((len_sel > 3'(MEB_LEN_SELS - 1)) ? (MEB_LEN_SELS - 1) : int'(len_sel));
    if (lg > SW) lg = SW;
    cur_mask = slot_t'((1 << lg) - 1);
  end

  // ---------------- write side ----------------
  logic          do_wr, freeze, release_buf;
  logic [BW-1:0] wbuf;
  slot_t         wslot;
  logic [IW:0]   widx;

  always_comb begin
    do_wr  = 1'b0;
    freeze = 1'b0;
    wbuf   = act_q;
    wslot  = slot_q[act_q];
    widx   = idx_q;
    if (wr_valid) begin
      if (wr_first) begin
        do_wr = 1'b1;
        widx  = '0;
        if (!started_q) begin
          wslot = '0;
        end else if (pend_q) begin
          freeze = 1'b1;
          wbuf   = act_q + 1'b1;
          wslot  = '0;
        end else begin
          wslot = (slot_q[act_q] + 1'b1) & mask_q[act_q];
        end
      end else if (started_q && idx_q < (IW+1)'(SLOT_WORDS)) begin
        do_wr = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) begin
      mem[{wbuf, wslot, widx[IW-1:0]}] <= wr_word;
      cnt_mem[{wbuf, wslot}]           <= widx + 1'b1;
    end
  end

  assign frozen_cnt = nfrozen_q;
  assign free_avail = started_q && !pend_q && (nfrozen_q < (BW+1)'(NBUF - 1));
  assign trig_lost  = trigger && !free_avail;

  always_ff @(posedge clk) begin
    if (rst) begin
      act_q     <= '0;
      started_q <= 1'b0;
      pend_q    <= 1'b0;
      idx_q     <= '0;
      nfrozen_q <= '0;
      for (int b = 0; b < NBUF; b++) begin
        slot_q[b] <= '0;
        wrap_q[b] <= 1'b0;
        mask_q[b] <= '0;
      end
    end else begin
      if (trigger && free_avail) pend_q <= 1'b1;
      if (do_wr) begin
        idx_q        <= widx + 1'b1;
        slot_q[wbuf] <= wslot;
        if (wr_first) begin
          if (!started_q || freeze) begin
            started_q    <= 1'b1;
            wrap_q[wbuf] <= 1'b0;
            mask_q[wbuf] <= cur_mask;
          end else if (slot_q[act_q] == mask_q[act_q]) begin
            wrap_q[act_q] <= 1'b1;
          end
        end
      end
      if (freeze) begin
        act_q  <= act_q + 1'b1;
        pend_q <= 1'b0;
      end
      nfrozen_q <= nfrozen_q + (BW+1)'(freeze) - (BW+1)'(release_buf);
    end
  end

  // ---------------- read side ----------------
  typedef enum logic {RD_IDLE, RD_READ} rd_state_e;
  rd_state_e   rstate_q;
  slot_t       rslot_q;
  logic [SW:0] rleft_q;
  logic [IW:0] ridx_q;
  logic [IW:0] rcnt;
  logic        last_in_slot, last_slot, advance;

  always_comb begin
    rcnt         = cnt_mem[{rd_buf_q, rslot_q}];
    last_in_slot = (ridx_q + 1'b1) >= rcnt;
    last_slot    = (rleft_q == (SW+1)'(1));
    rd_valid     = (rstate_q == RD_READ) && (rcnt != '0);
    rd_data      = mem[{rd_buf_q, rslot_q, ridx_q[IW-1:0]}];
    rd_last      = rd_valid && last_in_slot && last_slot;
    advance      = (rstate_q == RD_READ) && ((rd_valid && rd_ready) || (rcnt == '0));
    release_buf  = advance && last_in_slot && last_slot;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rstate_q <= RD_IDLE;
      rd_buf_q <= '0;
      rslot_q  <= '0;
      rleft_q  <= '0;
      ridx_q   <= '0;
    end else begin
      unique case (rstate_q)
        RD_IDLE: begin
          if (nfrozen_q != '0) begin
            rstate_q <= RD_READ;
            ridx_q   <= '0;
            if (wrap_q[rd_buf_q]) begin
              rslot_q <= (slot_q[rd_buf_q] + 1'b1) & mask_q[rd_buf_q];
              rleft_q <= (SW+1)'(mask_q[rd_buf_q]) + 1'b1;
            end else begin
              rslot_q <= '0;
              rleft_q <= (SW+1)'(slot_q[rd_buf_q]) + 1'b1;
            end
          end
        end
        RD_READ: begin
          if (advance) begin
            if (last_in_slot) begin
              ridx_q  <= '0;
              rslot_q <= (rslot_q + 1'b1) & mask_q[rd_buf_q];
              rleft_q <= rleft_q - 1'b1;
              if (last_slot) begin
                rd_buf_q <= rd_buf_q + 1'b1;
                rstate_q <= RD_IDLE;
              end
            end else begin
              ridx_q <= ridx_q + 1'b1;
            end
          end
        end
        default: rstate_q <= RD_IDLE;
      endcase
    end
  end

  // A frozen buffer is never the one being written.
  assert property (@(posedge clk) disable iff (rst) nfrozen_q <= (BW+1)'(NBUF - 1))
    else $error("meb: more frozen buffers than the ring allows");
  // Once valid, read data stays until taken.
  assert property (@(posedge clk) disable iff (rst) rd_valid && !rd_ready |=> rd_valid)
    else $error("meb: rd_valid dropped without handshake");
endmodule
