// tile_ctrl: sequencer of one tile operation (one layer, or the part of one
// mapped to this tile). Phases:
//  1. RD_IN  - for every crossbar k in use, read its 128 inputs (4 eDRAM rows
//              of 32 words) into the crossbar's input buffer. Crossbars form
//              groups of G that together hold G*128 rows of the same weight
//              columns: crossbar k takes input segment k mod G, stored at
//              eDRAM rows in_base + 4*(k mod G) .. +3, and output columns
//              32*(k div G) .. +31.
//  2. MAC    - start all MCUs and wait until every crossbar is done.
//  3. DU     - for each output group o and weight column j, stream the four
//              cell-column partial sums of crossbars o*G .. o*G+G-1 into the
//              shift-and-add unit ('first'/'last' frame the group); the tile's
//              data path applies ReLU, holds the value in the output register
//              and writes it to eDRAM word out_base + 32*o + j.
//  4. POOL   - optional: for each window w, read words out_base+4w .. +3, take
//              the maximum and write it back to word out_base + w.
// The phases and their order follow the paper's pipeline (eDRAM read,
// crossbar/ADC, shift-and-add, activation, eDRAM write, then pooling); this
// sequencer runs them one after the other for one input vector per crossbar,
// where the paper overlaps successive vectors and layers. The mapping rule and
// the configuration fields are this design's. 'start' is taken while idle,
// 'done' pulses once at the end. eDRAM reads have one clock of latency; the
// read-data consumers (input buffer, max-pool unit) are told one clock later
// through the *_d outputs.
module tile_ctrl
  import forms_pkg::*;
#(
  parameter int NXT = NMCU * NXB_MCU,     // crossbars in the tile
  parameter int NM  = NMCU
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  layer_cfg_t               cfg,
  input  logic [NM-1:0]            mcu_done,
  // eDRAM port request (reads for inputs and pooling, pooled writes)
  output logic                     ed_req,
  output logic [15:0]              ed_word_addr,   // 16-bit word address
  output logic                     ed_wr,          // write one word (pooled max)
  // input buffer write, aligned with eDRAM read data
  output logic                     ib_we_d,
  output logic [$clog2(NXT)-1:0]   ib_xb_d,
  output logic [1:0]               ib_part_d,
  // MCU start
  output logic                     mcu_start,
  // digital unit stream
  output logic                     du_valid,
  output logic                     du_first,
  output logic                     du_last,
  output logic [$clog2(NXT)-1:0]   du_xb,
  output logic [$clog2(NWCOL)-1:0] du_wcol,
  output logic [15:0]              du_addr,
  // max pooling, aligned with eDRAM read data
  output logic                     mp_valid_d,
  output logic                     mp_first_d,
  output logic [4:0]               mp_word_d,
  output logic                     busy,
  output logic                     done,
  // operation counters
  output logic [15:0]              n_outputs,
  output logic [15:0]              n_pooled
);
  typedef enum logic [3:0] {IDLE, RD_IN, RD_LAST, MAC_GO, MAC_WAIT, DU, DU_FLUSH, POOL, FIN} state_t;
  state_t state;

  logic [7:0]  k;          // crossbar index
  logic [7:0]  seg;        // k mod G
  logic [1:0]  part;       // eDRAM row within the segment
  logic [7:0]  g;          // crossbar within the group
  logic [7:0]  obase;      // first crossbar of the current group
  logic [4:0]  j;          // weight column
  logic [15:0] oaddr;      // output word address
  logic [2:0]  p;          // pooling step
  logic [15:0] w;          // pooling window
  logic [2:0]  flush;
  logic [NM-1:0] fin;

  wire [15:0] n_win = n_outputs >> 2;

  always_comb begin
    ed_req = 1'b0; ed_word_addr = '0; ed_wr = 1'b0;
    du_valid = 1'b0; du_first = (g == 8'd0); du_last = (g == cfg.group - 8'd1);
    du_xb = $clog2(NXT)'(obase + g); du_wcol = j; du_addr = oaddr;
    mcu_start = (state == MAC_GO);
    unique case (state)
      RD_IN: begin
        ed_req = 1'b1;
        ed_word_addr = (cfg.in_base + 16'(seg) * 16'd4 + 16'(part)) << 5;
      end
      DU: du_valid = 1'b1;
      POOL: begin
        if (p < 3'd4) begin
          ed_req = 1'b1; ed_word_addr = cfg.out_base + (w << 2) + 16'(p);
        end else if (p == 3'd5) begin
          ed_req = 1'b1; ed_wr = 1'b1; ed_word_addr = cfg.out_base + w;
        end
      end
      default: ;
    endcase
  end

  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; k <= '0; seg <= '0; part <= '0; g <= '0; obase <= '0; j <= '0;
      oaddr <= '0; p <= '0; w <= '0; flush <= '0; fin <= '0; done <= 1'b0;
      ib_we_d <= 1'b0; ib_xb_d <= '0; ib_part_d <= '0;
      mp_valid_d <= 1'b0; mp_first_d <= 1'b0; mp_word_d <= '0;
      n_outputs <= '0; n_pooled <= '0;
    end else begin
      done <= 1'b0;
      ib_we_d    <= (state == RD_IN);
      ib_xb_d    <= $clog2(NXT)'(k);
      ib_part_d  <= part;
      mp_valid_d <= (state == POOL) && (p < 3'd4);
      mp_first_d <= (p == 3'd0);
      mp_word_d  <= ed_word_addr[4:0];
      unique case (state)
        IDLE: if (start) begin
          state <= RD_IN; k <= '0; seg <= '0; part <= '0;
          n_outputs <= '0; n_pooled <= '0;
        end
        RD_IN: begin
          part <= part + 2'd1;
          if (part == 2'd3) begin
            seg <= (seg == cfg.group - 8'd1) ? 8'd0 : seg + 8'd1;
            k   <= k + 8'd1;
            if (k == cfg.n_xb - 8'd1) state <= RD_LAST;
          end
        end
        RD_LAST: state <= MAC_GO;   // last input row lands in its buffer
        MAC_GO: begin
          state <= MAC_WAIT; fin <= '0;
        end
        MAC_WAIT: begin
          fin <= fin | mcu_done;
          if (&(fin | mcu_done)) begin
            state <= DU; g <= '0; obase <= '0; j <= '0; oaddr <= cfg.out_base;
          end
        end
        DU: begin
          if (g == cfg.group - 8'd1) begin
            g <= '0;
            oaddr <= oaddr + 16'd1;
            n_outputs <= n_outputs + 16'd1;
            j <= j + 5'd1;
            if (j == 5'(NWCOL - 1)) begin
              obase <= obase + cfg.group;
              if (obase + cfg.group >= cfg.n_xb) begin
                state <= DU_FLUSH; flush <= '0;
              end
            end
          end else begin
            g <= g + 8'd1;
          end
        end
        DU_FLUSH: begin        // shift-and-add, activation and write drain
          flush <= flush + 3'd1;
          if (flush == 3'd4) begin
            if (cfg.pool_en && n_win != 16'd0) begin
              state <= POOL; p <= '0; w <= '0;
            end else begin
              state <= FIN;
            end
          end
        end
        POOL: begin
          if (p == 3'd5) begin
            p <= '0; w <= w + 16'd1;
            n_pooled <= n_pooled + 16'd1;
            if (w == n_win - 16'd1) state <= FIN;
          end else begin
            p <= p + 3'd1;
          end
        end
        FIN: begin
          state <= IDLE; done <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
