// main_ctrl: top-level controller of the accelerator (main control sequence).
//
// Runs the column-row-column schedule: a run has num_slots time slots (states
// ST1..STn, 512 for a 4096-input layer with 8x8 tiles). In slot s every PE
// works on column s of its row of weight tiles together with input features
// 8s+1..8s+8, so all PEs are busy in every slot and each memory is read once
// per run. A slot starts with an Rd cycle in which the controller pops all
// DPR-BUF FIFOs into their 1024-bit buffers and reads input word s (the input
// address generator); three processing cycles P1..P3 follow, so reads are at
// least RD_INTERVAL = 4 cycles apart. If any DPR-BUF has no tile yet the Rd
// waits (data_wait). After the last slot's Rd the controller waits for the PE
// pipeline (PE_LAT cycles) and pulses t512_en, which tells the bias/ReLU unit
// that the accumulators hold the layer's outputs.
//
// Timing: Rd in cycle t, PE inputs valid (pe_valid/pe_first/pe_last) in cycle
// t+1, t512_en in cycle t+1+PE_LAT of the last slot. start is taken only when
// idle and when the bias/ReLU unit has finished streaming the previous run.
//
// Follows the paper: one controller for all PE channels, one state per slot,
// Rd overlapped with the input read, Rd P1 P2 P3 cadence, reading only when
// the FIFOs are not empty, t512_en after the last slot. This design's
// choices: the run-time num_slots, the start/busy handshake, the drain count.
module main_ctrl #(
  parameter int SLOT_W      = 12,
  parameter int RD_INTERVAL = 4,
  parameter int PE_LAT      = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [SLOT_W-1:0] num_slots,
  input  logic              all_ready,
  input  logic              relu_busy,
  output logic              buf_rd,
  output logic              in_rd,
  output logic [SLOT_W-1:0] in_addr,
  output logic              pe_valid,
  output logic              pe_first,
  output logic              pe_last,
  output logic              t512_en,
  output logic              busy,
  output logic              data_wait
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;

  localparam int PH_W = $clog2(RD_INTERVAL + 1);
  localparam int DC_W = $clog2(PE_LAT + 1);

  state_t            state;
  logic [SLOT_W-1:0] slot;
  logic [PH_W-1:0]   ph;
  logic [DC_W-1:0]   dcnt;
  logic              last_slot;

  assign last_slot = (slot == num_slots - 1'b1);
  assign buf_rd    = (state == S_RUN) && (ph == '0) && all_ready;
  assign in_rd     = buf_rd;
  assign in_addr   = slot;
  assign data_wait = (state == S_RUN) && (ph == '0) && !all_ready;
  assign t512_en   = (state == S_DRAIN) && (dcnt == DC_W'(PE_LAT));
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      slot  <= '0;
      ph    <= '0;
      dcnt  <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (start && !relu_busy && num_slots != '0) begin
            state <= S_RUN;
            slot  <= '0;
            ph    <= '0;
          end
        end
        S_RUN: begin
          if (ph == '0) begin
            if (all_ready) begin
              ph <= (RD_INTERVAL > 1) ? PH_W'(1) : '0;
              if (last_slot) begin
                state <= S_DRAIN;
                dcnt  <= '0;
              end else begin
                slot <= slot + 1'b1;
              end
            end
          end else begin
            ph <= (ph == PH_W'(RD_INTERVAL - 1)) ? '0 : ph + 1'b1;
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (t512_en) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pe_valid <= 1'b0;
      pe_first <= 1'b0;
      pe_last  <= 1'b0;
    end else begin
      pe_valid <= buf_rd;
      pe_first <= buf_rd && (slot == '0);
      pe_last  <= buf_rd && last_slot;
    end
  end
endmodule
