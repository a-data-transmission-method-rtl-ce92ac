// event_building: packages each valid frame into an event and buffers complete events for
// the re-package stage.
//
// An event in the buffer is one header word {event_number[15:0], data_words[15:0]}
// followed by its data words. The header slot is reserved when the event starts and written
// when it ends, so events stream in without being held elsewhere. Nothing is visible to the
// reader until the event is committed: at ev_end with ev_ok the header is written, the write
// pointer advances and the event length (header included) is pushed into a small length
// queue. An event whose checksum failed, that would not fit the buffer (overflow) or that
// finds the length queue full is rolled back and counted. Event numbers count committed
// events only.
//
// Read side: evq_valid says a committed event is waiting, evq_len gives its length in words;
// evq_pop removes the length entry. rd_en reads the next word, rd_data is valid the clock
// after (registered memory read). The header format and the commit/rollback buffering are
// this design's own; the paper states only that this block packages valid data into events.
module event_building #(
  parameter int unsigned DEPTH     = 2048,   // event buffer, 32-bit words
  parameter int unsigned LEN_DEPTH = 16      // committed events that can wait
) (
  input  logic        clk,
  input  logic        rst_n,
  // from data_processing
  input  logic        ev_start,
  input  logic        ev_word_valid,
  input  logic [31:0] ev_word,
  input  logic        ev_end,
  input  logic        ev_ok,
  // to data_repackage
  output logic        evq_valid,
  output logic [15:0] evq_len,
  input  logic        evq_pop,
  input  logic        rd_en,
  output logic [31:0] rd_data,
  // statistics
  output logic [31:0] events_built,
  output logic [31:0] events_bad,
  output logic [31:0] events_overflow
);
  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned LAW = $clog2(LEN_DEPTH);

  logic [31:0]  mem [DEPTH];
  logic [AW:0]  wr_ptr;        // committed write pointer
  logic [AW:0]  wr_tmp;        // write pointer of the open event
  logic [AW:0]  hdr_ptr;       // reserved header slot of the open event
  logic [AW:0]  rd_ptr;
  logic [15:0]  nwords;
  logic [15:0]  event_no;
  logic         open;
  logic         ovf;

  logic [15:0]  lenq [LEN_DEPTH];
  logic [LAW:0] lq_wr, lq_rd;

  logic [AW:0]  used_tmp;
  assign used_tmp = wr_tmp - rd_ptr;
  logic         full_tmp;
  assign full_tmp = (used_tmp == (AW+1)'(DEPTH));
  logic         lq_full;
  assign lq_full  = ((lq_wr - lq_rd) == (LAW+1)'(LEN_DEPTH));

  // one write port: words, the reserved header, or nothing
  logic         mem_we;
  logic [AW-1:0] mem_waddr;
  logic [31:0]  mem_wdata;
  logic         commit;
  assign commit = ev_end && open && ev_ok && !ovf && !lq_full;

  always_comb begin
    mem_we    = 1'b0;
    mem_waddr = wr_tmp[AW-1:0];
    mem_wdata = ev_word;
    if (commit) begin
      mem_we    = 1'b1;
      mem_waddr = hdr_ptr[AW-1:0];
      mem_wdata = {event_no, nwords};
    end else if (ev_word_valid && open && !ovf && !full_tmp) begin
      mem_we = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (mem_we) mem[mem_waddr] <= mem_wdata;
  end

  always_ff @(posedge clk) begin
    if (commit) lenq[lq_wr[LAW-1:0]] <= nwords + 16'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr          <= '0;
      wr_tmp          <= '0;
      hdr_ptr         <= '0;
      nwords          <= '0;
      event_no        <= '0;
      open            <= 1'b0;
      ovf             <= 1'b0;
      lq_wr           <= '0;
      events_built    <= '0;
      events_bad      <= '0;
      events_overflow <= '0;
    end else begin
      if (ev_start) begin
        open    <= 1'b1;
        nwords  <= '0;
        hdr_ptr <= wr_ptr;
        // reserve the header slot
        if ((wr_ptr - rd_ptr) == (AW+1)'(DEPTH)) begin
          ovf    <= 1'b1;
          wr_tmp <= wr_ptr;
        end else begin
          ovf    <= 1'b0;
          wr_tmp <= wr_ptr + 1'b1;
        end
      end else if (ev_word_valid && open && !ovf) begin
        if (full_tmp) ovf <= 1'b1;
        else begin
          wr_tmp <= wr_tmp + 1'b1;
          nwords <= nwords + 1'b1;
        end
      end else if (ev_end && open) begin
        open <= 1'b0;
        if (commit) begin
          wr_ptr           <= wr_tmp;
          lq_wr            <= lq_wr + 1'b1;
          event_no         <= event_no + 1'b1;
          events_built     <= events_built + 1'b1;
        end else begin
          wr_tmp <= wr_ptr;                 // roll back
          if (!ev_ok) events_bad      <= events_bad + 1'b1;
          else        events_overflow <= events_overflow + 1'b1;
        end
      end
    end
  end

  // ---- read side ---------------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr  <= '0;
      lq_rd   <= '0;
      rd_data <= '0;
    end else begin
      if (rd_en) begin
        rd_data <= mem[rd_ptr[AW-1:0]];
        rd_ptr  <= rd_ptr + 1'b1;
      end
      if (evq_pop && evq_valid) lq_rd <= lq_rd + 1'b1;
    end
  end

  assign evq_valid = (lq_wr != lq_rd);
  assign evq_len   = lenq[lq_rd[LAW-1:0]];

  // the reader never runs past the last committed word
  a_no_read_past_commit: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> (rd_ptr != wr_ptr));
endmodule
