// event_selector: filters a stream of HADES binary events held in DDR2
// memory, copying accepted events to a second memory region and dropping
// rejected ones.
//
// The unit works in DMA blocks of 32 kB (8192 32-bit words), the published
// block size. It loads one block of the source region into an input buffer,
// then walks the events in it: it decodes just enough of each event header
// to know the event's length and identifier, issues the accept or reject
// decision, and appends an accepted event to an output buffer. A full output
// buffer, and the end of the source region, are written back to memory as
// one DMA burst. An event that runs past the end of the loaded block is not
// split: the next block is loaded starting at that event, so every event is
// decided from one contiguous copy.
//
// Event format (HADES list-mode header, from general knowledge of HADES, not
// from the published text): word 0 is the event size in bytes including the
// 8-word header, word 2 the event id (event type in its low bits). Words are
// 32-bit, events are ceil(size/4) words long and follow each other without
// padding. The decision rule is programmable and is this design's: accept
// when (id & acc_mask) == acc_value. An event shorter than its header, longer
// than a block, or cut off by the end of the region stops the run with
// `error` set.
//
// Memory port: requests (mem_req, mem_we, mem_addr in words, mem_wdata) are
// taken when mem_gnt is high; read data return in order on mem_rvalid /
// mem_rdata, any number of clocks later. Config is sampled on `start`;
// `done` pulses at the end. Timing: one word per clock for loading, copying
// and writing back when the memory grants every clock, plus 3 clocks per
// event for the header.
module event_selector
  import online_pkg::*;
#(
  parameter int unsigned BLOCK_WORDS = DMA_BYTES / 4,
  parameter int unsigned HDR_WORDS   = 8,
  parameter int unsigned AW          = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  // control
  input  logic          start,
  input  logic [AW-1:0] src_base,
  input  logic [AW-1:0] src_words,
  input  logic [AW-1:0] dst_base,
  input  logic [31:0]   acc_mask,
  input  logic [31:0]   acc_value,
  output logic          busy,
  output logic          done,
  output logic          error,
  output logic [31:0]   events_seen,
  output logic [31:0]   events_accepted,
  output logic [AW-1:0] words_written,
  output logic [31:0]   reloads,        // events that straddled a block end
  output logic [31:0]   flushes,        // write-back bursts
  // memory (DDR2 controller) port
  output logic          mem_req,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output logic [31:0]   mem_wdata,
  input  logic          mem_gnt,
  input  logic          mem_rvalid,
  input  logic [31:0]   mem_rdata
);
  localparam int unsigned BW = $clog2(BLOCK_WORDS);
  localparam int unsigned CW = BW + 1;          // counts 0..BLOCK_WORDS

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_CHECK, S_SIZE, S_ID, S_COPY, S_FLUSH, S_DONE
  } state_e;
  state_e state_q, after_flush_q;

  // ---------------- block buffers ----------------
  logic [31:0] ibuf [BLOCK_WORDS];
  logic [31:0] obuf [BLOCK_WORDS];
  logic          ib_we, ib_re, ob_we, ob_re;
  logic [BW-1:0] ib_wa, ib_ra, ob_wa, ob_ra;
  logic [31:0]   ib_wd, ob_wd, ib_rd_q, ob_rd_q;

  always_ff @(posedge clk) begin
    if (ib_we) ibuf[ib_wa] <= ib_wd;
    if (ib_re) ib_rd_q <= ibuf[ib_ra];
    if (ob_we) obuf[ob_wa] <= ob_wd;
    if (ob_re) ob_rd_q <= obuf[ob_ra];
  end

  // ---------------- run state ----------------
  logic [AW-1:0] src_ptr_q, src_end_q, dst_ptr_q;
  logic [31:0]   mask_q, value_q;
  logic [CW-1:0] fill_q;      // words in the input buffer
  logic [CW-1:0] req_q;       // read requests issued / write-back words sent
  logic [CW-1:0] rcv_q;       // read words received
  logic [CW-1:0] e_q;         // offset of the current event in the input buffer
  logic [CW-1:0] out_q;       // words in the output buffer
  logic [31:0]   words_q;     // length of the current event
  logic [CW-1:0] cp_rd_q;     // copy: next word to read
  logic          cp_v_q;      // copy: a read word is in ib_rd_q
  logic [CW-1:0] cp_wr_q;     // copy: next output slot
  logic          fl_v_q;      // flush: ob_rd_q holds the word to send

  logic [AW-1:0] remain;
  assign remain  = src_end_q - src_ptr_q;

  logic [31:0] size_words;
  assign size_words = (ib_rd_q + 32'd3) >> 2;

  logic accept;
  assign accept = ((ib_rd_q & mask_q) == value_q);

  // ---------------- memory port ----------------
  always_comb begin
    mem_req = 1'b0; mem_we = 1'b0; mem_addr = src_ptr_q + AW'(req_q); mem_wdata = ob_rd_q;
    if (state_q == S_LOAD && req_q < fill_q) begin
      mem_req = 1'b1;
    end else if (state_q == S_FLUSH && fl_v_q) begin
      mem_req = 1'b1; mem_we = 1'b1; mem_addr = dst_ptr_q + AW'(req_q);
    end
  end

  // ---------------- buffer port control ----------------
  always_comb begin
    ib_we = (state_q == S_LOAD) && mem_rvalid;
    ib_wa = BW'(rcv_q);
    ib_wd = mem_rdata;
    ib_re = 1'b0; ib_ra = BW'(e_q);
    ob_we = 1'b0; ob_wa = BW'(cp_wr_q); ob_wd = ib_rd_q;
    ob_re = 1'b0; ob_ra = BW'(req_q);
    unique case (state_q)
      S_CHECK: begin ib_re = (e_q != fill_q); ib_ra = BW'(e_q); end
      S_SIZE:  begin ib_re = 1'b1; ib_ra = BW'(e_q + CW'(2)); end
      S_COPY: begin
        ib_re = (cp_rd_q < e_q + CW'(words_q)); ib_ra = BW'(cp_rd_q);
        ob_we = cp_v_q;
      end
      S_FLUSH: begin
        // fetch the first word, then the next one each time a write is granted
        ob_re = (!fl_v_q || mem_gnt) && (req_q + CW'(fl_v_q) < out_q);
        ob_ra = BW'(req_q + CW'(fl_v_q));
      end
      default: ;
    endcase
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; after_flush_q <= S_IDLE;
      src_ptr_q <= '0; src_end_q <= '0; dst_ptr_q <= '0; mask_q <= '0; value_q <= '0;
      fill_q <= '0; req_q <= '0; rcv_q <= '0; e_q <= '0; out_q <= '0; words_q <= '0;
      cp_rd_q <= '0; cp_v_q <= 1'b0; cp_wr_q <= '0; fl_v_q <= 1'b0;
      busy <= 1'b0; done <= 1'b0; error <= 1'b0;
      events_seen <= '0; events_accepted <= '0; words_written <= '0;
      reloads <= '0; flushes <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          src_ptr_q <= src_base;
          src_end_q <= src_base + src_words;
          dst_ptr_q <= dst_base;
          mask_q <= acc_mask; value_q <= acc_value;
          out_q <= '0; error <= 1'b0; busy <= 1'b1;
          events_seen <= '0; events_accepted <= '0; words_written <= '0;
          reloads <= '0; flushes <= '0;
          fill_q <= (src_words > AW'(BLOCK_WORDS)) ? CW'(BLOCK_WORDS) : CW'(src_words);
          req_q <= '0; rcv_q <= '0;
          state_q <= S_LOAD;
        end
        S_LOAD: begin
          if (mem_req && mem_gnt) req_q <= req_q + 1'b1;
          if (mem_rvalid) rcv_q <= rcv_q + 1'b1;
          if (fill_q == '0) begin
            after_flush_q <= S_DONE;
            req_q <= '0; fl_v_q <= 1'b0;
            state_q <= S_FLUSH;
          end else if (rcv_q + CW'(mem_rvalid) == fill_q) begin
            e_q <= '0;
            state_q <= S_CHECK;
          end
        end
        S_CHECK: begin
          if (e_q == fill_q) begin            // block used up: load the next one
            src_ptr_q <= src_ptr_q + AW'(fill_q);
            fill_q  <= (remain - AW'(fill_q) > AW'(BLOCK_WORDS)) ? CW'(BLOCK_WORDS)
                                                                 : CW'(remain - AW'(fill_q));
            req_q <= '0; rcv_q <= '0;
            state_q <= S_LOAD;
          end else begin
            state_q <= S_SIZE;
          end
        end
        S_SIZE: begin                          // ib_rd_q = header word 0
          words_q <= size_words;
          state_q <= S_ID;
        end
        S_ID: begin                            // ib_rd_q = header word 2
          if (words_q < 32'(HDR_WORDS) || words_q > 32'(BLOCK_WORDS)) begin
            error <= 1'b1;
            after_flush_q <= S_DONE; req_q <= '0; fl_v_q <= 1'b0;
            state_q <= S_FLUSH;
          end else if (32'(e_q) + words_q > 32'(fill_q)) begin
            if (e_q == '0) begin               // cannot grow: region ends inside it
              error <= 1'b1;
              after_flush_q <= S_DONE; req_q <= '0; fl_v_q <= 1'b0;
              state_q <= S_FLUSH;
            end else begin                     // reload the block from this event
              reloads   <= reloads + 1'b1;
              src_ptr_q <= src_ptr_q + AW'(e_q);
              fill_q    <= (remain - AW'(e_q) > AW'(BLOCK_WORDS)) ? CW'(BLOCK_WORDS)
                                                                  : CW'(remain - AW'(e_q));
              req_q <= '0; rcv_q <= '0;
              state_q <= S_LOAD;
            end
          end else begin
            events_seen <= events_seen + 1'b1;
            if (accept) begin
              events_accepted <= events_accepted + 1'b1;
              cp_rd_q <= e_q; cp_v_q <= 1'b0;
              if (32'(out_q) + words_q > 32'(BLOCK_WORDS)) begin
                after_flush_q <= S_COPY; req_q <= '0; fl_v_q <= 1'b0;
                cp_wr_q <= '0;
                state_q <= S_FLUSH;
              end else begin
                cp_wr_q <= out_q;
                state_q <= S_COPY;
              end
            end else begin
              e_q <= e_q + CW'(words_q);
              state_q <= S_CHECK;
            end
          end
        end
        S_COPY: begin
          cp_v_q <= ib_re;
          if (ib_re) cp_rd_q <= cp_rd_q + 1'b1;
          if (cp_v_q) cp_wr_q <= cp_wr_q + 1'b1;
          if (!ib_re && cp_v_q) begin          // last word written this clock
            out_q   <= cp_wr_q + 1'b1;
            e_q     <= e_q + CW'(words_q);
            state_q <= S_CHECK;
          end
        end
        S_FLUSH: begin
          if (ob_re) fl_v_q <= 1'b1;
          else if (mem_gnt) fl_v_q <= 1'b0;
          if (mem_req && mem_gnt) req_q <= req_q + 1'b1;
          if (req_q + CW'(mem_req && mem_gnt) == out_q) begin
            if (out_q != '0) flushes <= flushes + 1'b1;
            dst_ptr_q     <= dst_ptr_q + AW'(out_q);
            words_written <= words_written + AW'(out_q);
            out_q  <= '0;
            fl_v_q <= 1'b0;
            state_q <= after_flush_q;
          end
        end
        S_DONE: begin
          busy <= 1'b0; done <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_no_write_during_load: assert property (@(posedge clk) disable iff (!rst_n)
      state_q == S_LOAD |-> !mem_we);
endmodule
