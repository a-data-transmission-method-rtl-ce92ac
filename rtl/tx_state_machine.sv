// tx_state_machine: the data transmission controller of the readout module, with the three
// states of the transmission chart: IDLE, TRANS and RE-TRANS.
//
// IDLE waits for valid data, i.e. a packet completed in the local RAM and not yet sent
// (tx_count != wr_count), and then enters TRANS, which sends packets for as long as the
// PHY interface is busy with one ("Cont."). When a packet is finished ("Fin.") the controller
// returns to IDLE, or enters RE-TRANS if the DAQ has reported an error in the meantime
// ("Err. Occur"). An error report is a retransmission request carrying a Counting No.; such
// requests wait in a queue of RQ_DEPTH entries. RE-TRANS sends the requested packets again
// from the local RAM, one after the other, and returns to IDLE when the queue is empty.
// A request is served only if that packet has already been sent once and is still held in
// the RAM (it is one of the last SLOTS-1 packets written); otherwise it is dropped and counted.
// Besides the drawn transitions, a request that arrives while IDLE with no new data sends
// the controller straight to RE-TRANS, so that the last packet of a run can be recovered.
// tx_start is a one-clock pulse with tx_slot; the PHY interface answers with tx_done when
// the frame and its inter-frame gap are over.
module tx_state_machine #(
  parameter int unsigned SLOTS    = 8,
  parameter int unsigned RQ_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] wr_count,          // packets completed by data_repackage
  output logic [31:0] tx_count,          // packets sent for the first time
  input  logic        rt_req_valid,
  input  logic [7:0]  rt_req_cnt,
  output logic        rt_active,
  output logic [7:0]  rt_cnt,
  // PHY interface
  output logic        tx_start,
  output logic [$clog2(SLOTS)-1:0] tx_slot,
  input  logic        tx_done,
  // status
  output readout_pkg::tx_state_e state,
  output logic [31:0] retransmissions,
  output logic [31:0] rt_rejected,
  output logic [31:0] rt_dropped          // requests lost to a full queue
);
  import readout_pkg::*;

  localparam int unsigned SW = $clog2(SLOTS);
  localparam int unsigned QW = $clog2(RQ_DEPTH);

  logic [7:0]  rq [RQ_DEPTH];
  logic [QW:0] rq_wr, rq_rd;
  logic        rq_empty, rq_full;
  assign rq_empty = (rq_wr == rq_rd);
  assign rq_full  = ((rq_wr - rq_rd) == (QW+1)'(RQ_DEPTH));
  logic [7:0]  rq_head;
  assign rq_head  = rq[rq_rd[QW-1:0]];

  // age of the requested packet: 1 = the last one sent
  logic [7:0]  age_tx;
  logic [31:0] pending;
  logic        head_ok;
  assign age_tx  = tx_count[7:0] - rq_head;
  assign pending = wr_count - tx_count;
  assign head_ok = (age_tx != 8'd0) && (32'(age_tx) <= tx_count) &&
                   (32'(age_tx) + pending <= 32'(SLOTS - 1));

  logic new_data;
  assign new_data = (wr_count != tx_count);

  logic busy;       // a frame has been started and tx_done not yet seen
  logic rq_pop;

  always_ff @(posedge clk) begin
    if (rt_req_valid && !rq_full) rq[rq_wr[QW-1:0]] <= rt_req_cnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= TX_IDLE;
      tx_count        <= '0;
      rt_active       <= 1'b0;
      rt_cnt          <= '0;
      tx_start        <= 1'b0;
      tx_slot         <= '0;
      busy            <= 1'b0;
      rq_wr           <= '0;
      rq_rd           <= '0;
      retransmissions <= '0;
      rt_rejected     <= '0;
      rt_dropped      <= '0;
    end else begin
      tx_start <= 1'b0;
      if (rt_req_valid) begin
        if (!rq_full) rq_wr <= rq_wr + 1'b1;
        else          rt_dropped <= rt_dropped + 1'b1;
      end
      if (rq_pop) rq_rd <= rq_rd + 1'b1;

      unique case (state)
        TX_IDLE: begin
          if (new_data) begin                         // "Valid data"
            state    <= TX_TRANS;
            tx_start <= 1'b1;
            tx_slot  <= tx_count[SW-1:0];
            busy     <= 1'b1;
          end else if (!rq_empty) begin               // error reported while idle
            if (head_ok) begin
              state     <= TX_RETRANS;
              tx_start  <= 1'b1;
              tx_slot   <= rq_head[SW-1:0];
              rt_active <= 1'b1;
              rt_cnt    <= rq_head;
              busy      <= 1'b1;
            end else begin
              rt_rejected <= rt_rejected + 1'b1;
            end
          end
        end
        TX_TRANS: begin
          if (busy && tx_done) begin                  // "Fin."
            busy     <= 1'b0;
            tx_count <= tx_count + 1'b1;
            state    <= rq_empty ? TX_IDLE : TX_RETRANS;   // "Err. Occur"
          end
        end
        TX_RETRANS: begin
          if (busy) begin
            if (tx_done) begin
              busy            <= 1'b0;
              rt_active       <= 1'b0;
              retransmissions <= retransmissions + 1'b1;
            end
          end else if (rq_empty) begin
            state <= TX_IDLE;                         // "Fin."
          end else if (head_ok) begin                 // "Cont."
            tx_start  <= 1'b1;
            tx_slot   <= rq_head[SW-1:0];
            rt_active <= 1'b1;
            rt_cnt    <= rq_head;
            busy      <= 1'b1;
          end else begin
            rt_rejected <= rt_rejected + 1'b1;
          end
        end
        default: state <= TX_IDLE;
      endcase
    end
  end

  // the queue head is consumed when it is sent or rejected
  always_comb begin
    rq_pop = 1'b0;
    if (!rq_empty) begin
      if (state == TX_IDLE && !new_data) rq_pop = 1'b1;
      if (state == TX_RETRANS && !busy)  rq_pop = 1'b1;
    end
  end

  a_start_only_when_free: assert property (@(posedge clk) disable iff (!rst_n)
    tx_start |-> $past(!busy));
endmodule
