// main_rf_bank: one bank of the high-capacity, high-latency main register file.
//
// A single-ported, non-pipelined bank of ROWS x 1024-bit warp registers. It accepts one
// transfer request when idle and stays busy until that transfer is finished, so requests
// to the same bank serialize: this is the bank conflict that register renumbering avoids.
//  FILL (main -> register cache): LAT cycles of cell access, then the register is sent
//        over the main-side crossbar in BEATS flits of FLIT_W bits to its cache bank.
//  WB   (register cache -> main): BEATS flits are received from the cache bank first,
//        then LAT cycles of cell access, after which the row holds the register.
// At the end of either, `done` pulses for one cycle with the warp and register number.
// The array models the dense cells (TFET SRAM or domain-wall memory in the paper) by their
// access latency only; LAT = 7 stands for the 6.3x latency of the densest configuration
// against an assumed 1-cycle baseline bank. Request encoding, the order of access and
// transfer, and the done pulse are this design's choices.
module main_rf_bank
  import ltrf_pkg::*;
#(
  parameter int unsigned ROWS = MAIN_ROWS,
  parameter int unsigned LAT  = MAIN_LAT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    req_valid,
  output logic                    req_ready,      // bank idle
  input  main_req_t               req,
  input  logic [$clog2(ROWS)-1:0] req_row,
  // crossbar side
  output logic                    x_req,
  output logic [BANK_W-1:0]       x_dst,
  output logic [OFF_W-1:0]        x_off,
  output xfer_dir_e               x_dir,
  input  logic                    x_gnt,          // one beat moves this cycle
  output flit_t                   x_flit_out,     // FILL data toward the cache
  input  flit_t                   x_flit_in,      // WB data from the cache
  // completion
  output logic                    done,
  output main_req_t               done_info
);
  typedef enum logic [1:0] {S_IDLE, S_ACCESS, S_XFER} state_e;

  localparam int unsigned LW = (LAT > 1) ? $clog2(LAT + 1) : 1;
  localparam int unsigned BTW = $clog2(BEATS);

  reg_data_t mem [ROWS];

  state_e                  state;
  main_req_t               cur;
  logic [$clog2(ROWS)-1:0] row;
  reg_data_t               buffer;
  logic [LW-1:0]           cnt;
  logic [BTW-1:0]          beat;

  assign req_ready  = (state == S_IDLE);
  assign x_req      = (state == S_XFER);
  assign x_dst      = cur.rfc_bank;
  assign x_off      = cur.rfc_off;
  assign x_dir      = cur.dir;
  assign x_flit_out = buffer[beat*FLIT_W +: FLIT_W];
  assign done_info  = cur;

  always_ff @(posedge clk) begin
    if (state == S_ACCESS && cnt == LW'(LAT - 1) && cur.dir == XFER_WB) mem[row] <= buffer;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cur    <= '0;
      row    <= '0;
      buffer <= '0;
      cnt    <= '0;
      beat   <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (req_valid) begin
          cur   <= req;
          row   <= req_row;
          cnt   <= '0;
          beat  <= '0;
          state <= (req.dir == XFER_FILL) ? S_ACCESS : S_XFER;
        end
        S_ACCESS: begin
          if (cnt == LW'(LAT - 1)) begin
            if (cur.dir == XFER_FILL) begin
              buffer <= mem[row];
              state  <= S_XFER;
            end else begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_XFER: if (x_gnt) begin
          if (cur.dir == XFER_WB) buffer[beat*FLIT_W +: FLIT_W] <= x_flit_in;
          beat <= beat + 1'b1;
          if (beat == BTW'(BEATS - 1)) begin
            if (cur.dir == XFER_FILL) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              state <= S_ACCESS;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) req_valid |-> req_ready);
endmodule
