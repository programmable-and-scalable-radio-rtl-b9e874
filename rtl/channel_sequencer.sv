// channel_sequencer: plays one channel's pulse sequence with clock-exact timing.
//
// A sequence is a list of entries in sequence_memory. OP_PLAY entries name a pulse event
// ("edge"): a frequency, amplitude, phase offset, VGA level with optional shaping, a TTL
// level and the wait, in clocks, until the next edge. OP_LOOP/OP_ENDL repeat the entries
// between them (one loop level) and OP_END stops. Edge times are scheduled from the
// start trigger: edge n+1 is due wait_n clocks after edge n was due, so timing is set by
// the event table alone and is the same on every channel and card.
//
// Operation. A write of 1 to the control register (arm) resets the list pointer and
// prepares the first edge; the global trigger then starts the sequence clock t at 0.
// For each edge the sequencer
//   1. reads the list entry (1 clock) and decodes it (1 clock; loop entries loop back),
//   2. reads the event (1 clock) and, if the event's spi flag is set, starts an SPI
//      transfer of frequency and amplitude into the DDS buffer registers (~146 clocks),
//   3. waits until t reaches the due time, the SPI transfer is done and the coherent
//      phase for the next clock is ready, then fires: IO_UPDATE makes the buffered
//      frequency and amplitude active, the phase word goes out on the parallel bus,
//      the VGA shaper starts and the TTL output changes.
// The phase of an edge is computed with the frequency the DDS will play after it: the
// event's own frequency if it loads one over SPI, otherwise the one already playing.
// All pins change on the clock after the fire clock. An edge whose preparation is not
// finished when it is due fires as soon as it is ready and counts in late_count; later
// edges keep their scheduled times. Minimum wait: 5 clocks for an edge without SPI,
// about 150 clocks (1.2 us) when the next edge loads a new frequency. At the OP_END
// entry the sequencer waits for the last edge's wait to elapse and sets done.
//
// The paper gives the event model (edge = wait + frequency/phase/amplitude, timing in
// clocks after the previous event), the global trigger, SPI for frequency/amplitude and
// the parallel bus for the phase, and the phase = frequency x time rule. The arm/trigger
// handshake, loop opcodes, prefetch order and late-edge policy are this design's.
module channel_sequencer
  import rf_pkg::*;
#(
  parameter int unsigned SEQ_AW = 7,
  parameter int unsigned EVT_AW = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              arm,
  input  logic              halt,
  input  logic              trigger,
  // sequence memory
  output logic [SEQ_AW-1:0] seq_raddr,
  input  logic [31:0]       seq_rdata,
  output logic [EVT_AW-1:0] evt_raddr,
  input  event_t            evt_rdata,
  // SPI writer
  output logic              spi_start,
  output logic [FTW_W-1:0]  spi_ftw,
  output logic [ASF_W-1:0]  spi_asf,
  input  logic              spi_busy,
  // phase tracker
  output logic [FTW_W-1:0]  ph_ftw,
  output logic [POW_W-1:0]  ph_offset,
  output logic [TIME_W-1:0] t_next,
  input  logic [POW_W-1:0]  ph_pow,
  // pulse shaper
  output logic              sh_start,
  output logic              sh_shaped,
  output logic [VGA_W-1:0]  sh_level,
  // DDS pins
  output logic              io_update,
  output logic [POW_W-1:0]  par_data,
  output logic [1:0]        par_f,
  output logic              par_txen,
  output logic              ttl,
  // status
  output logic              armed,
  output logic              running,
  output logic              done,
  output logic [15:0]       late_count,
  output logic [31:0]       edge_count,
  output logic [TIME_W-1:0] t
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_LOAD, S_WAIT, S_WAIT_END} state_e;
  state_e state;

  logic [SEQ_AW-1:0] ptr, loop_start;
  logic [21:0]       loop_cnt;
  logic              in_loop;
  event_t            nxt;
  logic              phase_ok;
  logic [TIME_W-1:0] t_due;
  seq_entry_t        ent;
  logic              fire;
  logic [FTW_W-1:0]  cur_ftw;

  assign ent       = seq_entry_t'(seq_rdata);
  assign seq_raddr = ptr;
  assign evt_raddr = EVT_AW'(ent.idx);
  assign spi_ftw   = evt_rdata.ftw;
  assign spi_asf   = evt_rdata.asf;
  assign spi_start = (state == S_LOAD) && evt_rdata.spi;
  // an edge without an SPI load keeps the frequency the DDS is playing
  assign ph_ftw    = nxt.spi ? nxt.ftw : cur_ftw;
  assign ph_offset = nxt.pow;
  assign t_next    = (trigger && armed && !running) ? '0 : (running ? t + 1'b1 : t);
  assign fire      = (state == S_WAIT) && running && phase_ok && !spi_busy && (t >= t_due);
  assign sh_start  = fire;
  assign sh_shaped = nxt.shaped;
  assign sh_level  = nxt.vga;
  assign armed     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ptr        <= '0;
      loop_start <= '0;
      loop_cnt   <= '0;
      in_loop    <= 1'b0;
      nxt        <= '0;
      cur_ftw    <= '0;
      phase_ok   <= 1'b0;
      t_due      <= '0;
      t          <= '0;
      running    <= 1'b0;
      done       <= 1'b0;
      late_count <= '0;
      edge_count <= '0;
      io_update  <= 1'b0;
      par_data   <= '0;
      par_f      <= '0;
      par_txen   <= 1'b0;
      ttl        <= 1'b0;
    end else begin
      io_update <= 1'b0;
      par_txen  <= 1'b0;
      t         <= t_next;
      if (trigger && armed && !running) running <= 1'b1;

      if (halt) begin
        state    <= S_IDLE;
        running  <= 1'b0;
        phase_ok <= 1'b0;
      end else begin
        unique case (state)
          S_IDLE: if (arm) begin
            state      <= S_FETCH;
            ptr        <= '0;
            in_loop    <= 1'b0;
            t_due      <= '0;
            t          <= '0;
            done       <= 1'b0;
            late_count <= '0;
            edge_count <= '0;
          end
          S_FETCH: state <= S_DECODE;
          S_DECODE: begin
            unique case (ent.op)
              OP_PLAY: state <= S_LOAD;
              OP_LOOP: begin
                loop_start <= ptr + 1'b1;
                loop_cnt   <= ent.count;
                in_loop    <= 1'b1;
                ptr        <= ptr + 1'b1;
                state      <= S_FETCH;
              end
              OP_ENDL: begin
                if (in_loop && loop_cnt > 22'd1) begin
                  loop_cnt <= loop_cnt - 1'b1;
                  ptr      <= loop_start;
                end else begin
                  in_loop  <= 1'b0;
                  ptr      <= ptr + 1'b1;
                end
                state <= S_FETCH;
              end
              OP_END: state <= S_WAIT_END;
            endcase
          end
          S_LOAD: begin
            nxt      <= evt_rdata;
            phase_ok <= 1'b0;
            state    <= S_WAIT;
          end
          S_WAIT: begin
            phase_ok <= 1'b1;
            if (fire) begin
              io_update  <= 1'b1;
              par_data   <= ph_pow;
              par_f      <= PAR_DEST_PHASE;
              par_txen   <= 1'b1;
              ttl        <= nxt.ttl;
              if (nxt.spi) cur_ftw <= nxt.ftw;
              t_due      <= t_due + nxt.wait_cyc;
              edge_count <= edge_count + 1'b1;
              if (t != t_due) late_count <= late_count + 1'b1;
              phase_ok   <= 1'b0;
              ptr        <= ptr + 1'b1;
              state      <= S_FETCH;
            end
          end
          S_WAIT_END: if (running && t >= t_due) begin
            done    <= 1'b1;
            running <= 1'b0;
            state   <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  // an edge never fires while the DDS buffer registers are being written
  assert property (@(posedge clk) disable iff (!rst_n) fire |-> !spi_busy);

endmodule
