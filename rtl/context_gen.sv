// context_gen -- the context generation module.
//
// Owns the neighbour matrix (nm_bram) and processes one event at a time from
// the FIFO, following the original design's sequence:
//   1. read the event's own cell ("check for duplicates"); if it already holds
//      the same timestamp the event is dropped and the next one is fetched;
//   2. read the 48 cells of the 7x7 context over both BRAM ports ("check
//      context"); each read returns its cell one clock later as a candidate;
//   3. write the event's timestamp into its own cell ("save to context") and
//      flag that the context is complete.
// The centre read shares read cycle 0 with the first candidate on port B, so a
// kept event takes 25 read cycles and 1 write cycle: 26 clocks, back to back
// with the next event when the FIFO is not empty. A dropped event takes 2 clocks
// (its centre read and the cycle that sees the result); the candidate already
// read on port B in cycle 0 is discarded.
//
// After reset, and after each `clear_req` pulse, the matrix is emptied by
// writing 0 to every cell through port A (SIZE*SIZE clocks) before the next
// event is taken; `clear_req` is served once the event in progress is done.
// Clearing, the valid bit and the FIFO handshake are this design's choices.
//
// Outputs (stage s1, the cycle a read returns):
//   s1_cand_valid[p]  port p returned an in-matrix context candidate
//   s1_cand_x/y[p]    its coordinates; s1_cell_valid/t[p] the cell's contents
//   s1_ev             the event being processed {x, y, t, p}
//   s1_last           the last read of a kept event returns now (context done)
//   drop              pulse: the event in progress is a duplicate and is dropped
// FIFO: fifo_rd_en pops; fifo_q is taken the cycle after.
module context_gen #(
  parameter int unsigned SIZE  = gg_pkg::SIZE_DEF,
  parameter int unsigned R     = gg_pkg::R_DEF,
  localparam int unsigned CW   = $clog2(SIZE),
  localparam int unsigned EW   = 3 * CW + 1,
  localparam int unsigned NCYC = gg_pkg::n_read_cycles(R),
  localparam int unsigned CYW  = $clog2(NCYC + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear_req,
  // FIFO side
  input  logic          fifo_empty,
  input  logic [EW-1:0] fifo_q,
  output logic          fifo_rd_en,
  // candidates, one clock after their read
  output logic [1:0]    s1_cand_valid,
  output logic [CW-1:0] s1_cand_x [2],
  output logic [CW-1:0] s1_cand_y [2],
  output logic [1:0]    s1_cell_valid,
  output logic [CW-1:0] s1_cell_t [2],
  output logic [EW-1:0] s1_ev,
  output logic          s1_last,
  // duplicate drop
  output logic          drop,
  // status
  output logic          clearing,
  output logic          busy
);

  typedef struct packed {
    logic [CW-1:0] x;
    logic [CW-1:0] y;
    logic [CW-1:0] t;
    logic          p;
  } nev_t;

  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_READ, S_WRITE} state_t;

  localparam int unsigned DW = CW + 1;
  localparam int unsigned AW = 2 * CW;

  state_t         state;
  logic [CYW-1:0] cyc;
  nev_t           cur;
  logic [CW-1:0]  now_x, now_y;   // coordinates of the event being scanned
  logic [AW-1:0]  clr_addr;
  logic           clr_pend;

  // read metadata, aligned with the returning data
  logic [1:0]     m_valid;
  logic [CW-1:0]  m_cx [2];
  logic [CW-1:0]  m_cy [2];
  logic           m_center, m_last;

  // BRAM
  logic           a_en, a_we, b_en;
  logic [AW-1:0]  a_addr, b_addr;
  logic [DW-1:0]  a_wdata, a_rdata, b_rdata;

  // scan
  logic [1:0]     sc_rd_en, sc_inb;
  logic           sc_center;
  logic [CW-1:0]  sc_x [2];
  logic [CW-1:0]  sc_y [2];
  logic [AW-1:0]  sc_addr [2];

  logic           is_dup, dup_now, fetch;

  nm_bram #(.SIZE(SIZE), .DW(DW)) u_nm (
    .clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata, .b_en, .b_addr, .b_rdata
  );

  // in read cycle 0 the event comes straight from the FIFO output
  always_comb begin
    nev_t q;
    q = nev_t'(fifo_q);
    if (state == S_READ && cyc == '0) {now_x, now_y} = {q.x, q.y};
    else                              {now_x, now_y} = {cur.x, cur.y};
  end

  context_scan #(.SIZE(SIZE), .R(R)) u_scan (
    .cyc(cyc), .cx(now_x), .cy(now_y),
    .rd_en(sc_rd_en), .inb(sc_inb), .is_center(sc_center),
    .cand_x(sc_x), .cand_y(sc_y), .addr(sc_addr)
  );

  dup_check #(.TW(CW)) u_dup (
    .cell_valid(a_rdata[CW]), .cell_t(a_rdata[CW-1:0]), .ev_t(cur.t), .dup(is_dup)
  );

  // the centre read returns in this cycle and matches: drop the event
  always_comb dup_now = m_center && is_dup;

  // next event can be fetched at the end of this cycle
  always_comb begin
    fetch = 1'b0;
    unique case (state)
      S_IDLE:  fetch = !clr_pend && !clear_req;
      S_WRITE: fetch = !clr_pend && !clear_req;
      S_READ:  fetch = dup_now && !clr_pend && !clear_req;
      default: fetch = 1'b0;
    endcase
    fetch = fetch && !fifo_empty;
  end
  assign fifo_rd_en = fetch;

  // BRAM port control
  always_comb begin
    a_en    = 1'b0;
    a_we    = 1'b0;
    a_addr  = sc_addr[0];
    a_wdata = '0;
    b_en    = 1'b0;
    b_addr  = sc_addr[1];
    unique case (state)
      S_CLEAR: begin
        a_en   = 1'b1;
        a_we   = 1'b1;
        a_addr = clr_addr;
      end
      S_READ: begin
        a_en = sc_rd_en[0] && !dup_now;
        b_en = sc_rd_en[1] && !dup_now;
      end
      S_WRITE: begin
        a_en    = 1'b1;
        a_we    = 1'b1;
        a_addr  = {cur.y, cur.x};
        a_wdata = {1'b1, cur.t};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_CLEAR;
      cyc      <= '0;
      cur      <= '0;
      clr_addr <= '0;
      clr_pend <= 1'b0;
      m_valid  <= '0;
      m_center <= 1'b0;
      m_last   <= 1'b0;
      for (int p = 0; p < 2; p++) begin
        m_cx[p] <= '0;
        m_cy[p] <= '0;
      end
    end else begin
      if (clear_req) clr_pend <= 1'b1;

      // metadata of the reads issued this cycle
      m_valid  <= '0;
      m_center <= 1'b0;
      m_last   <= 1'b0;
      if (state == S_READ && !dup_now) begin
        m_valid  <= sc_inb;
        m_center <= sc_center;
        m_last   <= (cyc == CYW'(NCYC - 1));
        for (int p = 0; p < 2; p++) begin
          m_cx[p] <= sc_x[p];
          m_cy[p] <= sc_y[p];
        end
      end

      unique case (state)
        S_CLEAR: begin
          clr_pend <= 1'b0;
          clr_addr <= clr_addr + 1'b1;
          if (clr_addr == AW'(SIZE * SIZE - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (clr_pend || clear_req) begin
            state    <= S_CLEAR;
            clr_addr <= '0;
          end else if (fetch) begin
            state <= S_READ;
            cyc   <= '0;
          end
        end
        S_READ: begin
          if (cyc == '0) cur <= nev_t'(fifo_q);
          if (dup_now) begin
            if (clr_pend || clear_req) begin
              state    <= S_CLEAR;
              clr_addr <= '0;
            end else if (fetch) begin
              cyc <= '0;
            end else begin
              state <= S_IDLE;
            end
          end else if (cyc == CYW'(NCYC - 1)) begin
            state <= S_WRITE;
          end else begin
            cyc <= cyc + 1'b1;
          end
        end
        S_WRITE: begin
          if (clr_pend || clear_req) begin
            state    <= S_CLEAR;
            clr_addr <= '0;
          end else if (fetch) begin
            state <= S_READ;
            cyc   <= '0;
          end else begin
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // candidate outputs; the port-B candidate read next to a duplicate's centre
  // is discarded
  always_comb begin
    s1_cand_valid = dup_now ? 2'b00 : m_valid;
    for (int p = 0; p < 2; p++) begin
      s1_cand_x[p] = m_cx[p];
      s1_cand_y[p] = m_cy[p];
    end
    s1_cell_valid = {b_rdata[CW], a_rdata[CW]};
    s1_cell_t[0]  = a_rdata[CW-1:0];
    s1_cell_t[1]  = b_rdata[CW-1:0];
    s1_ev         = cur;
    s1_last       = m_last;
    drop          = dup_now;
    clearing      = (state == S_CLEAR);
    busy          = (state != S_IDLE);
  end

  a_write_is_own_cell: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_WRITE) |-> (a_addr == {cur.y, cur.x}))
    else $error("context_gen: save-to-context address mismatch");

endmodule
