// sram_seq: trigger-sequence record / playback engine on the 4M x 18 SRAM.
//
// The card carries a 4M-word synchronous pipelined ("no bus turnaround")
// SRAM of which 22 address and 16 data lines reach the FPGA. This block uses
// it as a long history recorder and as a sequencer that replays what it
// recorded.
//
// Word format (16 bits): {ECR, BCR, L1A, delta[12:0]}. `delta` is the number
// of BCs since the previous word (1..8191). A word is written in every BC in
// which an L1A, BCR or ECR occurs; if 8191 BCs pass without one, a word with
// no flags and delta 8191 keeps the time base. At a 75 kHz L1A rate plus
// the 11.2 kHz BCR rate this is ~86 k words/s, so the 4M words hold ~48 s.
//
// Modes (`mode`, dave_pkg::seq_mode_e):
//   RECORD: entering it clears the write pointer; words go to addresses
//     0,1,2,... and wrap at 4M (`wrapped` is then set). Recording stops when
//     the mode is left or, with `stop_on_busy`, on a rising edge of the system
//     BUSY, so the memory keeps the history leading up to the BUSY.
//   PLAY: entering it reads `len` words (0 means 4M) from address `start`
//     on, through a prefetch FIFO, and re-creates the pulses on pb_l1a,
//     pb_bcr, pb_ecr with the recorded spacing. Timing starts once the FIFO
//     is full (or all words are fetched). With `loop` the sequence repeats.
//     If a word is emitted later than its recorded time (the FIFO refills at
//     one word per BC, so this should not happen, but it is checked),
//     `underrun` is set.
//   IDLE: the host may load the host pointer, write words (`host_wr`) and
//     read words (`host_rd`, result in `host_rdata` with `host_valid`); the
//     pointer increments after each access. Host accesses in other modes
//     are ignored.
//
// SRAM timing: the command (ce_n, we_n, addr) is registered and presented
// one cycle after the decision; write data is driven, and read data
// sampled, LAT cycles after the command cycle (LAT = 2 for the pipelined
// part). Back-to-back reads and writes in any order need no idle cycle.
//
// Follows the paper: record and playback of trigger/BCR/ECR sequences in the
// 4Mx18 SRAM, 22 address and 16 data lines, ~50 s of history at a 75 kHz L1A
// rate, stop on system BUSY. The word format, the prefetch FIFO, the host
// access path and the SRAM pipeline handling are this design's choices.
module sram_seq #(
  parameter int unsigned AW    = dave_pkg::SRAM_AW,
  parameter int unsigned DW    = dave_pkg::SRAM_DW,
  parameter int unsigned LAT   = 2,
  parameter int unsigned DEPTH = 8
) (
  input  logic          clk,
  input  logic          rst,
  // control
  input  logic [1:0]    mode,
  input  logic          stop_on_busy,
  input  logic          loop,
  input  logic [AW-1:0] start,
  input  logic [AW-1:0] len,
  input  logic          busy_rise,
  // events to record
  input  logic          rec_l1a,
  input  logic          rec_bcr,
  input  logic          rec_ecr,
  // host access
  input  logic          host_ptr_ld,
  input  logic [AW-1:0] host_ptr_in,
  input  logic          host_wr,
  input  logic [DW-1:0] host_wdata,
  input  logic          host_rd,
  output logic [AW-1:0] host_ptr,
  output logic [DW-1:0] host_rdata,
  output logic          host_valid,
  output logic          host_busy,
  // playback
  output logic          pb_l1a,
  output logic          pb_bcr,
  output logic          pb_ecr,
  // status
  output logic          rec_active,
  output logic          play_active,
  output logic          wrapped,
  output logic          underrun,
  output logic [AW-1:0] wptr,
  // SRAM pins
  output logic          sram_ce_n,
  output logic          sram_we_n,
  output logic [AW-1:0] sram_addr,
  output logic [DW-1:0] sram_dout,
  output logic          sram_oe,     // FPGA drives the data lines
  input  logic [DW-1:0] sram_din
);
  import dave_pkg::*;

  localparam int unsigned DLW = SEQ_DELTA_W;
  localparam int unsigned CW  = $clog2(DEPTH + LAT + 2);

  typedef enum logic [1:0] {K_REC, K_PLAY, K_HOST} kind_e;

  typedef struct packed {
    logic          v;
    logic          we;
    kind_e         kind;
    logic [DW-1:0] data;
  } stage_t;

  // ---------------------------------------------------------------- mode edges
  logic [1:0] mode_q;
  logic       enter_rec, enter_play;

  always_ff @(posedge clk) begin
    if (rst) mode_q <= SEQ_IDLE;
    else     mode_q <= mode;
  end
  assign enter_rec  = (mode == SEQ_RECORD) && (mode_q != SEQ_RECORD);
  assign enter_play = (mode == SEQ_PLAY)   && (mode_q != SEQ_PLAY);

  // ---------------------------------------------------------------- recorder
  logic [DLW-1:0] delta;
  logic           rec_ev, rec_wr;

  assign rec_ev = rec_l1a || rec_bcr || rec_ecr;
  assign rec_wr = rec_active && (rec_ev || delta == SEQ_DELTA_MAX);

  always_ff @(posedge clk) begin
    if (rst) begin
      rec_active <= 1'b0;
      wptr       <= '0;
      wrapped    <= 1'b0;
      delta      <= DLW'(1);
    end else if (enter_rec) begin
      rec_active <= 1'b1;
      wptr       <= '0;
      wrapped    <= 1'b0;
      delta      <= DLW'(1);
    end else begin
      if (mode != SEQ_RECORD || (stop_on_busy && busy_rise)) rec_active <= 1'b0;
      if (rec_wr) begin
        delta <= DLW'(1);
        wptr  <= wptr + AW'(1);
        if (&wptr) wrapped <= 1'b1;
      end else if (rec_active) begin
        delta <= delta + DLW'(1);
      end
    end
  end

  // ---------------------------------------------------------------- playback fetch
  logic [AW-1:0] pb_addr;
  logic [AW:0]   pb_left;        // words still to fetch in this pass
  logic [AW:0]   pb_total;
  logic [CW-1:0] inflight, fifo_cnt;
  logic          pb_rd, pb_ret, fifo_pop, fetch_done, primed;

  assign pb_total   = (len == '0) ? {1'b1, {AW{1'b0}}} : {1'b0, len};
  assign fetch_done = (pb_left == '0) && !loop;
  assign pb_rd      = play_active && (pb_left != '0) &&
                      (CW'(inflight) + fifo_cnt < CW'(DEPTH));

  always_ff @(posedge clk) begin
    if (rst) begin
      play_active <= 1'b0;
      pb_addr     <= '0;
      pb_left     <= '0;
    end else if (enter_play) begin
      play_active <= 1'b1;
      pb_addr     <= start;
      pb_left     <= pb_total;
    end else if (mode != SEQ_PLAY) begin
      play_active <= 1'b0;
      pb_left     <= '0;
    end else begin
      if (pb_rd) begin
        pb_addr <= pb_addr + AW'(1);
        pb_left <= pb_left - 1'b1;
      end else if (play_active && pb_left == '0 && loop) begin
        pb_addr <= start;
        pb_left <= pb_total;
      end
      if (fetch_done && inflight == '0 && fifo_cnt == '0) play_active <= 1'b0;
    end
  end

  // ---------------------------------------------------------------- host access
  logic host_ok, host_wr_go, host_rd_go, host_ret;

  assign host_ok    = (mode == SEQ_IDLE) && !rec_active && !play_active && !host_busy;
  assign host_wr_go = host_ok && host_wr;
  assign host_rd_go = host_ok && host_rd && !host_wr;

  always_ff @(posedge clk) begin
    if (rst) begin
      host_ptr   <= '0;
      host_busy  <= 1'b0;
      host_valid <= 1'b0;
      host_rdata <= '0;
    end else begin
      if (host_ptr_ld)                   host_ptr <= host_ptr_in;
      else if (host_wr_go || host_rd_go) host_ptr <= host_ptr + AW'(1);
      if (host_rd_go) begin
        host_busy  <= 1'b1;
        host_valid <= 1'b0;
      end else if (host_ret) begin
        host_busy  <= 1'b0;
        host_valid <= 1'b1;
        host_rdata <= sram_din;
      end
    end
  end

  // ---------------------------------------------------------------- SRAM pipeline
  stage_t        st_d;
  logic [AW-1:0] addr_d;
  stage_t [LAT:0] st;   // st[0] = command cycle, st[LAT] = data cycle

  always_comb begin
    st_d   = '0;
    addr_d = '0;
    if (rec_wr) begin
      st_d   = '{v: 1'b1, we: 1'b1, kind: K_REC,
                 data: DW'({rec_ecr, rec_bcr, rec_l1a, delta})};
      addr_d = wptr;
    end else if (pb_rd) begin
      st_d   = '{v: 1'b1, we: 1'b0, kind: K_PLAY, data: '0};
      addr_d = pb_addr;
    end else if (host_wr_go || host_rd_go) begin
      st_d   = '{v: 1'b1, we: host_wr_go, kind: K_HOST, data: host_wdata};
      addr_d = host_ptr;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st        <= '0;
      sram_ce_n <= 1'b1;
      sram_we_n <= 1'b1;
      sram_addr <= '0;
    end else begin
      st[0] <= st_d;
      for (int i = 1; i <= LAT; i++) st[i] <= st[i-1];
      sram_ce_n <= !st_d.v;
      sram_we_n <= !(st_d.v && st_d.we);
      sram_addr <= addr_d;
    end
  end

  assign sram_oe   = st[LAT].v && st[LAT].we;
  assign sram_dout = st[LAT].data;
  assign pb_ret    = st[LAT].v && !st[LAT].we && st[LAT].kind == K_PLAY;
  assign host_ret  = st[LAT].v && !st[LAT].we && st[LAT].kind == K_HOST;

  always_ff @(posedge clk) begin
    if (rst || enter_play || mode != SEQ_PLAY) inflight <= '0;
    else inflight <= inflight + CW'(pb_rd) - CW'(pb_ret);
  end

  // ---------------------------------------------------------------- prefetch FIFO
  logic [DW-1:0]            fifo [DEPTH];
  logic [$clog2(DEPTH)-1:0] f_wr, f_rd;
  logic [DW-1:0]            head;
  logic [DLW-1:0]           timer;

  assign head     = fifo[f_rd];
  assign fifo_pop = primed && fifo_cnt != '0 && timer >= head[DLW-1:0];

  always_ff @(posedge clk) begin
    if (pb_ret) fifo[f_wr] <= sram_din;
  end

  always_ff @(posedge clk) begin
    if (rst || enter_play || mode != SEQ_PLAY) begin
      f_wr     <= '0;
      f_rd     <= '0;
      fifo_cnt <= '0;
    end else begin
      if (pb_ret)   f_wr <= f_wr + 1'b1;
      if (fifo_pop) f_rd <= f_rd + 1'b1;
      fifo_cnt <= fifo_cnt + CW'(pb_ret) - CW'(fifo_pop);
    end
  end

  // Playback clock: starts when the FIFO is full or everything is fetched.
  always_ff @(posedge clk) begin
    if (rst || enter_play || mode != SEQ_PLAY) begin
      primed   <= 1'b0;
      timer    <= DLW'(1);
      pb_l1a   <= 1'b0;
      pb_bcr   <= 1'b0;
      pb_ecr   <= 1'b0;
    end else begin
      if (fifo_cnt == CW'(DEPTH) || (fetch_done && inflight == '0)) primed <= 1'b1;
      pb_l1a <= fifo_pop && head[DLW];
      pb_bcr <= fifo_pop && head[DLW+1];
      pb_ecr <= fifo_pop && head[DLW+2];
      if (fifo_pop)     timer <= DLW'(1);
      else if (primed && timer != SEQ_DELTA_MAX) timer <= timer + DLW'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (rst || enter_play) underrun <= 1'b0;
    else if (fifo_pop && timer > head[DLW-1:0]) underrun <= 1'b1;
  end
endmodule
