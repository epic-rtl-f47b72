// buffer_controller: DC buffer controller (popularity counter, buffer select,
// buffer evict).
//
// It keeps the temporal order of the buffered entries in an order list
// (position 0 = oldest, count-1 = newest); the redundancy-check sequencer
// reads it through ord_pos/ord_id to visit entries from the closest timestep
// backwards. Two commands:
//   OP_INC   : read-modify-write the metadata word holding P_c of entry cmd_id
//              and add one (saturating).
//   OP_ALLOC : return a free slot in alloc_id and append it at the newest
//              end of the order list. While the buffer is not full, slots are
//              handed out in order. When it is full, the controller scans all
//              entries oldest first, picks the one with the lowest saliency
//              score S_c, then lowest popularity P_c (first found wins ties,
//              i.e. the oldest), streams its 51 words (32 RGB, 16 depth,
//              3 metadata) out to main storage, removes it from the order list
//              by shifting the newer positions down, and reuses its slot.
// The paper's flow chart evicts "the buffer entry with lowest Ac and Sc"; Ac
// is read as the popularity score, and the lexicographic order of the two
// keys is this design's choice.
//
// The controller owns DC buffer port A while busy (cmd_ready low).
// Timing: OP_INC takes 3 cycles; OP_ALLOC 1 cycle when not full, otherwise
// about N_ENT (scan) + 2*51 (stream, with ev_ready high) + shift cycles.
// ord_id is the order-list entry at ord_pos one cycle earlier.
module buffer_controller
  import epic_pkg::*;
#(
  parameter int unsigned N_ENT = N_ENTRIES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  logic                  cmd_op,        // 0: OP_INC, 1: OP_ALLOC
  input  logic [ID_W-1:0]       cmd_id,
  output logic                  cmd_done,
  output logic [ID_W-1:0]       alloc_id,
  output logic                  alloc_evicted,  // the slot was freed by eviction
  // order list
  input  logic [ID_W-1:0]       ord_pos,
  output logic [ID_W-1:0]       ord_id,
  output logic [ID_W:0]         count,
  // evicted entries to main storage
  output logic                  ev_valid,
  input  logic                  ev_ready,
  output logic [WORD_W-1:0]     ev_data,
  output logic                  ev_last,
  output logic [ID_W-1:0]       ev_id,
  // DC buffer port A
  output logic                  mem_en,
  output logic                  mem_we,
  output logic [3:0]            mem_bank,
  output logic [ROW_W-1:0]      mem_row,
  output logic [WORD_W-1:0]     mem_wdata,
  input  logic [WORD_W-1:0]     mem_rdata
);
  localparam logic OP_INC = 1'b0;

  typedef enum logic [2:0] {
    S_IDLE, S_INC_RD, S_INC_WR, S_SCAN, S_OUT_RD, S_OUT_HOLD, S_SHIFT
  } state_e;
  state_e state;

  logic [ID_W-1:0] order [N_ENT];
  logic [ID_W-1:0] id_q;
  logic [ID_W:0]   pos;           // scan / shift position
  logic            scan_v;        // a metadata read is in flight
  logic [ID_W-1:0] scan_pos_q;
  logic [ID_W-1:0] scan_id_q;
  logic [23:0]     best_key;
  logic [ID_W-1:0] best_pos, best_id;
  logic [5:0]      w;             // word of the victim being streamed

  assign cmd_ready = (state == S_IDLE);

  // order list read port for the sequencer
  always_ff @(posedge clk) ord_id <= order[ord_pos];

  // word w of entry id
  function automatic void word_loc(input logic [ID_W-1:0] id, input logic [5:0] wi,
                                   output logic [3:0] b, output logic [ROW_W-1:0] r);
    if (wi < 6'(RGB_WORDS)) begin
      b = rgb_bank(id); r = rgb_row(id, int'(wi));
    end else if (wi < 6'(RGB_WORDS + DEP_WORDS)) begin
      b = dep_bank(id); r = dep_row(id, int'(wi) - RGB_WORDS);
    end else begin
      b = 4'(META_BANK); r = meta_row(id, int'(wi) - RGB_WORDS - DEP_WORDS);
    end
  endfunction

  logic [23:0] key_rd;
  assign key_rd = {mem_rdata[23:16], mem_rdata[15:0]};   // {S_c, P_c}

  // memory port A
  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_bank  = 4'(META_BANK);
    mem_row   = meta_row(id_q, 2);
    mem_wdata = mem_rdata;
    unique case (state)
      S_INC_RD: begin
        mem_en = 1'b1;
      end
      S_INC_WR: begin
        mem_en = 1'b1;
        mem_we = 1'b1;
        mem_wdata[15:0] = (mem_rdata[15:0] == 16'hFFFF) ? 16'hFFFF : mem_rdata[15:0] + 1'b1;
      end
      S_SCAN: begin
        mem_en  = (pos < (ID_W+1)'(N_ENT));
        mem_row = meta_row(order[pos[ID_W-1:0]], 2);
      end
      S_OUT_RD: begin
        mem_en = 1'b1;
        word_loc(best_id, w, mem_bank, mem_row);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      count         <= '0;
      id_q          <= '0;
      pos           <= '0;
      scan_v        <= 1'b0;
      scan_pos_q    <= '0;
      scan_id_q     <= '0;
      best_key      <= '1;
      best_pos      <= '0;
      best_id       <= '0;
      w             <= '0;
      cmd_done      <= 1'b0;
      alloc_id      <= '0;
      alloc_evicted <= 1'b0;
      ev_valid      <= 1'b0;
      ev_data       <= '0;
      ev_last       <= 1'b0;
      ev_id         <= '0;
    end else begin
      cmd_done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          if (cmd_op == OP_INC) begin
            id_q  <= cmd_id;
            state <= S_INC_RD;
          end else if (count < (ID_W+1)'(N_ENT)) begin
            order[count[ID_W-1:0]] <= count[ID_W-1:0];
            alloc_id      <= count[ID_W-1:0];
            alloc_evicted <= 1'b0;
            count         <= count + 1'b1;
            cmd_done      <= 1'b1;
          end else begin
            pos      <= '0;
            scan_v   <= 1'b0;
            best_key <= '1;
            best_pos <= '0;
            best_id  <= order[0];
            state    <= S_SCAN;
          end
        end
        S_INC_RD: state <= S_INC_WR;
        S_INC_WR: begin
          cmd_done <= 1'b1;
          state    <= S_IDLE;
        end
        S_SCAN: begin
          // stage 1: metadata word of the previous position has arrived
          if (scan_v && key_rd < best_key) begin
            best_key <= key_rd;
            best_pos <= scan_pos_q;
            best_id  <= scan_id_q;
          end
          if (pos < (ID_W+1)'(N_ENT)) begin
            scan_v     <= 1'b1;
            scan_pos_q <= pos[ID_W-1:0];
            scan_id_q  <= order[pos[ID_W-1:0]];
            pos        <= pos + 1'b1;
          end else begin
            scan_v <= 1'b0;
            w      <= '0;
            state  <= S_OUT_RD;
          end
        end
        S_OUT_RD: state <= S_OUT_HOLD;
        S_OUT_HOLD: begin
          if (!ev_valid) begin
            ev_valid <= 1'b1;
            ev_data  <= mem_rdata;
            ev_id    <= best_id;
            ev_last  <= (w == 6'(ENTRY_WORDS - 1));
          end else if (ev_ready) begin
            ev_valid <= 1'b0;
            ev_last  <= 1'b0;
            if (w == 6'(ENTRY_WORDS - 1)) begin
              pos   <= (ID_W+1)'(best_pos);
              state <= S_SHIFT;
            end else begin
              w     <= w + 1'b1;
              state <= S_OUT_RD;
            end
          end
        end
        S_SHIFT: begin
          if (pos == (ID_W+1)'(N_ENT - 1)) begin
            order[N_ENT-1] <= best_id;
            alloc_id       <= best_id;
            alloc_evicted  <= 1'b1;
            cmd_done       <= 1'b1;
            state          <= S_IDLE;
          end else begin
            order[pos[ID_W-1:0]] <= order[pos[ID_W-1:0] + 1'b1];
            pos <= pos + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
