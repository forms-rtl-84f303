// xbar_ctrl: flow control of one crossbar (one plane of an MCU).
// Work is done in slots of NCOL clocks, one input bit per slot, because each
// ADC needs one clock per column it serves. Sub-array rows (fragment row
// groups) are processed one at a time, lowest first. In each slot the chosen
// row's shift registers drive their LSBs onto the wordlines; at the slot's
// last clock the column sums are sampled into the hold registers (tagged with
// row and bit position) and the row's registers shift by one. During the next
// slot the ADCs sweep the held columns, one per clock, while the array already
// takes the next bit: the bit-level pipelining of the reference pipeline.
// At the first clock of every slot the controller asks whether the current row
// is finished: with zero skipping on, when the zero-skipping AND for the row
// is 1 (its remaining bits are all zero); with it off, after IN_BITS bits. It
// then moves to the next row that has work; a row whose inputs are all zero
// gets no slot at all when skipping is on. After the last row a final slot
// drains the held sample. The skip rule is the paper's; the slot structure,
// the row order and the skip_en mode input are this design's.
// Interface: 'start' (one clock, while idle) loads all input registers and
// clears the accumulators; 'done' pulses for one clock at the end, NCOL*S + 4
// clocks after the start clock, where S = 1 + (bits fed over all rows) is the
// number of slots (S = 0 if no row has work). A row is fed its effective bits
// (the position of the highest 1 among its FRAG inputs) with skipping on, or
// IN_BITS bits with it off. 'bit_slots' reports the bits fed.
module xbar_ctrl #(
  parameter int NSUB    = 16,
  parameter int IN_BITS = 16,
  parameter int NCOL    = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          skip_en,
  input  logic [NSUB-1:0]               frag_done,   // zero-skipping AND per sub-array row
  output logic                          load,        // parallel load of all input registers
  output logic                          clear,       // clear accumulators
  output logic [NSUB-1:0]               shift,       // shift the registers of one sub-array row
  output logic                          drive_en,    // sub-array decoder enable
  output logic [$clog2(NSUB)-1:0]       drive_sub,   // sub-array decoder select
  output logic                          sample,      // sample-and-hold strobe
  output logic [$clog2(NCOL)-1:0]       adc_sel,     // ADC column select
  output logic                          acc_valid,   // ADC code valid this clock
  output logic [$clog2(NCOL)-1:0]       acc_col,
  output logic [$clog2(IN_BITS)-1:0]    acc_bit,
  output logic [$clog2(NSUB)-1:0]       acc_sub,
  output logic                          busy,
  output logic                          done,
  output logic [15:0]                   bit_slots    // input-bit slots used by the last run
);
  typedef enum logic [1:0] {IDLE, LOAD, RUN, TAIL} state_t;
  localparam int SW = $clog2(NSUB);
  localparam int BW = $clog2(IN_BITS + 1);

  state_t                  state;
  logic [$clog2(NCOL)-1:0] cnt;
  logic                    active;          // a row is being fed
  logic                    rows_left;       // rows after 'cur' may still need work
  logic [SW-1:0]           cur;
  logic [BW-1:0]           fed;             // bits fed to the current row
  logic                    held_v;          // hold registers carry an unconverted sample
  logic [SW-1:0]           held_sub;
  logic [$clog2(IN_BITS)-1:0] held_bit;

  // Next row with work at or after 'from'.
  logic [NSUB-1:0] has_work;
  assign has_work = skip_en ? ~frag_done : '1;

  function automatic logic [SW:0] find_row(input logic [NSUB-1:0] w, input int from);
    find_row = {1'b0, SW'(0)};
    for (int i = NSUB - 1; i >= 0; i--)
      if (i >= from && w[i]) find_row = {1'b1, SW'(i)};
  endfunction

  logic row_finished;
  assign row_finished = skip_en ? frag_done[cur] : (fed == BW'(IN_BITS));

  logic [SW:0] nxt;
  always_comb begin
    if (!active) nxt = find_row(has_work, 0);
    else         nxt = find_row(has_work, int'(cur) + 1);
  end

  wire slot_first = (state == RUN) && (cnt == '0);
  wire slot_last  = (state == RUN) && (cnt == $clog2(NCOL)'(NCOL - 1));

  // Row that drives the wordlines in this clock.
  assign drive_en  = (state == RUN) && active;
  assign drive_sub = cur;
  assign sample    = slot_last && active;
  always_comb begin
    shift = '0;
    if (slot_last && active) shift[cur] = 1'b1;
  end
  assign load    = (state == IDLE) && start;
  assign clear   = load;
  assign adc_sel = cnt;
  assign busy    = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; cnt <= '0; active <= 1'b0; rows_left <= 1'b0; cur <= '0; fed <= '0;
      held_v <= 1'b0; held_sub <= '0; held_bit <= '0;
      acc_valid <= 1'b0; acc_col <= '0; acc_bit <= '0; acc_sub <= '0;
      done <= 1'b0; bit_slots <= '0;
    end else begin
      done <= 1'b0;
      // ADC result of this clock's conversion appears next clock: tag it.
      acc_valid <= (state == RUN) && held_v;
      acc_col   <= cnt;
      acc_bit   <= held_bit;
      acc_sub   <= held_sub;
      unique case (state)
        IDLE: if (start) begin
          state <= LOAD; active <= 1'b0; rows_left <= 1'b1; held_v <= 1'b0; bit_slots <= '0;
        end
        LOAD: begin            // registers hold the new inputs now
          state <= RUN; cnt <= '0;
        end
        RUN: begin
          cnt <= (cnt == $clog2(NCOL)'(NCOL - 1)) ? '0 : cnt + 1'b1;
          if (slot_first && rows_left && (!active || row_finished)) begin
            active    <= nxt[SW];
            rows_left <= nxt[SW];
            cur       <= nxt[SW] ? nxt[SW-1:0] : cur;
            fed       <= '0;
          end
          // Nothing left to feed and nothing held: finished.
          if (slot_first && !held_v && (!rows_left || (!nxt[SW] && (!active || row_finished))))
            state <= TAIL;
          if (slot_last) begin
            if (active) begin
              held_v    <= 1'b1;
              held_sub  <= cur;
              held_bit  <= fed[$clog2(IN_BITS)-1:0];
              fed       <= fed + 1'b1;
              bit_slots <= bit_slots + 1'b1;
            end else begin
              held_v <= 1'b0;
            end
          end
        end
        TAIL: begin            // last accumulation completes this clock
          state <= IDLE; done <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
