// ml_asm: the Algorithmic State Machine that connects an APU's addressable
// input buffers to a streaming ML core and the core's result to the
// downstream buffer.
//
// Read side (states R_IDLE, R_HWAIT, R_HDR, R_NEXT, R_XFER): when event_ready
// is high it reads address 0 of each source's BRAM, which holds the index of
// the last valid word (cnt), then reads addresses 1..cnt of each non-empty
// source in index order and presents each word to the core on
// nn_in_valid/nn_in_data, one word per clock (the BRAM's one-cycle read
// latency is pipelined, so a source's words come without gaps). nn_in_last
// marks the final word of the last non-empty source. An event in which every
// source is empty is not sent to the core; only a header of 0 is written.
// Write side (states W_IDLE, W_XFER, W_END): when the core pulses
// nn_out_valid, the N_OUT result words are captured and written to addresses
// 1..N_OUT of the downstream BRAM, one per clock; then (W_END) the header
// word N_OUT, the index of the last valid word, is written to address 0 with
// dn_commit, and event_done is pulsed for one cycle.
//
// Follows the paper's Algorithm 1: the IDLE/TRANSFER read machine started by
// the first word, the IDLE/TRANSFER/END write machine started by the network's
// output-valid, and the final write of the last data index with event_done.
// Choices of this design: payload at addresses 1..cnt (Algorithm 1 loops over
// addresses 0..counter-1 while saying address 0 holds the header; the header
// is not sent to the core here), the write loop over the core's N_OUT outputs
// rather than the input count, the sequential reading of several sources, and
// an output layout that repeats the input layout so the next APU can read it.
module ml_asm #(
  parameter int unsigned N_SRC = 1,
  parameter int unsigned N_OUT = 5,
  parameter int unsigned AW    = 8,
  parameter int unsigned W     = 16,
  localparam int unsigned SRCW = (N_SRC > 1) ? $clog2(N_SRC) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // from / to the sync controller
  input  logic            event_ready,
  output logic            event_done,
  // upstream BRAM read port (data one cycle after address)
  output logic [SRCW-1:0] rd_src,
  output logic [AW-1:0]   rd_addr,
  input  logic [W-1:0]    rd_data,
  // stream into the ML core
  output logic            nn_in_valid,
  output logic            nn_in_last,
  output logic [W-1:0]    nn_in_data,
  // result of the ML core
  input  logic            nn_out_valid,
  input  logic [W-1:0]    nn_out_data [N_OUT],
  // downstream BRAM write port
  output logic            dn_wr_en,
  output logic [AW-1:0]   dn_wr_addr,
  output logic [W-1:0]    dn_wr_data,
  output logic            dn_commit
);
  typedef enum logic [2:0] {R_IDLE, R_HWAIT, R_HDR, R_NEXT, R_XFER} rstate_e;
  typedef enum logic [1:0] {W_IDLE, W_XFER, W_END} wstate_e;

  rstate_e         rstate;
  wstate_e         wstate;
  logic [AW-1:0]   ra;                // address presented to the BRAM this cycle
  logic [AW-1:0]   cnts [N_SRC];      // header of every source
  logic [AW-1:0]   cnt;               // header of the source being streamed
  logic            issuing;           // ra is a payload address to be read
  logic            pend;              // rd_data this cycle is a payload word
  logic            pend_last;         // ... and the last word of its source
  logic [SRCW-1:0] src;
  logic [SRCW-1:0] last_src;          // highest source with payload
  logic            any_payload;
  logic            read_done;
  logic            empty_ev;          // no source had payload
  logic [W-1:0]    obuf [N_OUT];
  logic [$clog2(N_OUT+1)-1:0] widx;
  localparam int unsigned OW = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  assign rd_addr = ra;
  assign rd_src  = src;

  always_comb begin
    last_src    = '0;
    any_payload = 1'b0;
    for (int s = 0; s < N_SRC; s++)
      if (cnts[s] != '0) begin
        last_src    = SRCW'(s);
        any_payload = 1'b1;
      end
  end

  // ---------------- read side ----------------
  // All headers are read first (R_HWAIT/R_HDR per source), so the final word
  // of the stream is known even when later sources are empty; then the
  // payload of every non-empty source is streamed (R_NEXT/R_XFER).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate    <= R_IDLE;
      ra        <= '0;
      cnts      <= '{default: '0};
      cnt       <= '0;
      issuing   <= 1'b0;
      pend      <= 1'b0;
      pend_last <= 1'b0;
      src       <= '0;
      read_done <= 1'b0;
      empty_ev  <= 1'b0;
    end else begin
      unique case (rstate)
        R_IDLE: begin
          if (event_ready && !read_done) begin
            ra     <= '0;
            src    <= '0;
            rstate <= R_HWAIT;
          end
        end
        R_HWAIT: rstate <= R_HDR;          // header read in flight
        R_HDR: begin
          cnts[src] <= rd_data[AW-1:0];
          if (src == SRCW'(N_SRC-1)) begin
            src    <= '0;
            rstate <= R_NEXT;
          end else begin
            src    <= src + 1'b1;
            rstate <= R_HWAIT;
          end
        end
        R_NEXT: begin
          if (!any_payload) begin
            empty_ev  <= 1'b1;
            read_done <= 1'b1;
            rstate    <= R_IDLE;
          end else if (cnts[src] == '0) begin
            src <= src + 1'b1;
          end else begin
            cnt     <= cnts[src];
            ra      <= AW'(1);
            issuing <= 1'b1;
            rstate  <= R_XFER;
          end
        end
        R_XFER: begin
          pend      <= issuing;
          pend_last <= issuing && (ra == cnt);
          if (issuing) begin
            if (ra == cnt) issuing <= 1'b0;
            else           ra      <= ra + 1'b1;
          end
          if (pend && pend_last) begin
            pend      <= 1'b0;
            pend_last <= 1'b0;
            if (src == last_src) begin
              read_done <= 1'b1;
              rstate    <= R_IDLE;
            end else begin
              src    <= src + 1'b1;
              rstate <= R_NEXT;
            end
          end
        end
        default: rstate <= R_IDLE;
      endcase
      if (event_done) begin
        read_done <= 1'b0;
        empty_ev  <= 1'b0;
      end
    end
  end

  assign nn_in_valid = (rstate == R_XFER) && pend;
  assign nn_in_last  = nn_in_valid && pend_last && (src == last_src);
  assign nn_in_data  = rd_data;

  // ---------------- write side ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wstate <= W_IDLE;
      widx   <= '0;
      for (int i = 0; i < N_OUT; i++) obuf[i] <= '0;
    end else begin
      unique case (wstate)
        W_IDLE: if (nn_out_valid) begin
          obuf   <= nn_out_data;
          widx   <= '0;
          wstate <= W_XFER;
        end else if (read_done && empty_ev) begin
          wstate <= W_END;               // empty event: header only
        end
        W_XFER: begin
          if (widx == ($bits(widx))'(N_OUT-1)) wstate <= W_END;
          widx <= widx + 1'b1;
        end
        W_END: if (read_done) wstate <= W_IDLE;
        default: wstate <= W_IDLE;
      endcase
    end
  end

  always_comb begin
    dn_wr_en   = 1'b0;
    dn_wr_addr = '0;
    dn_wr_data = '0;
    dn_commit  = 1'b0;
    event_done = 1'b0;
    if (wstate == W_XFER) begin
      dn_wr_en   = 1'b1;
      dn_wr_addr = AW'(widx) + AW'(1);
      dn_wr_data = obuf[widx[OW-1:0]];
    end else if (wstate == W_END && read_done) begin
      dn_wr_en   = 1'b1;
      dn_wr_addr = '0;
      dn_wr_data = empty_ev ? '0 : W'(N_OUT);
      dn_commit  = 1'b1;
      event_done = 1'b1;
    end
  end
endmodule
