// control_unit: host-visible configuration registers and the sequencer
// of the output-stationary dataflow.
//
// The host writes the layer format (IS-1 of weights, activations and
// outputs, the signed 3-bit SC of the weights, ReLU enable), the
// dot-product length K, the number of output tiles and the base
// addresses, then writes 1 to CTRL to start. For each tile the sequencer
//   FEED   reads K consecutive words from the ifmap and filter buffers,
//          one of each per cycle; the first is marked as the start of a
//          new sum,
//   WAIT   waits ROWS+COLS-1 cycles for the last operands to cross the
//          skewed array,
//   CAP    copies all PE results into the output registers,
//   DRAIN  writes ROWS ofmap words, bottom row first, while the array
//          shifts its outputs down.
// A tile therefore takes K + 2*ROWS + COLS cycles. Tile t reads ifmap
// words from IFM_BASE + t*K, filter words from FLT_BASE + t*FLT_STEP and
// writes ofmap words OFM_BASE + t*ROWS .. + ROWS-1 (word r = PE row r).
// STATUS.done is set at the end and stays set until the next start;
// `done_irq` pulses for one cycle. REG_CYCLES holds the cycles the last
// operation took. Register reads are combinational.
//
// The design names a control unit connected to the host, the buffers
// and the array but does not describe it; the register map, the
// sequence and the data layout expected in the buffers (one ifmap word
// per step of the sum, i.e. an im2col layout prepared by the host) are
// this design's choices.
module control_unit
  import tent_pkg::*;
#(
  parameter int unsigned ROWS = ARRAY_ROWS,
  parameter int unsigned COLS = ARRAY_COLS,
  parameter int unsigned AW   = 13
) (
  input  logic            clk,
  input  logic            rst_n,
  // host register port
  input  logic            reg_we,
  input  logic [3:0]      reg_addr,
  input  logic [31:0]     reg_wdata,
  output logic [31:0]     reg_rdata,
  output logic            done_irq,
  // layer format to the array
  output tfx_fmt_t        fmt,
  // buffer reads for the array
  output logic            ifm_rd_en,
  output logic [AW-1:0]   ifm_rd_addr,
  output logic            flt_rd_en,
  output logic [AW-1:0]   flt_rd_addr,
  // array control, aligned with the buffer read data
  output logic            act_vld,
  output logic            act_first,
  output logic            cap,
  output logic            shift,
  // ofmap buffer write
  output logic            ofm_wr_en,
  output logic [AW-1:0]   ofm_wr_addr,
  output logic            busy
);
  typedef enum logic [2:0] {S_IDLE, S_FEED, S_WAIT, S_CAP, S_DRAIN} state_e;

  localparam int unsigned WAIT_CYC = ROWS + COLS - 1;

  state_e      state;
  logic [31:0] cnt;
  logic [31:0] k_len, n_tiles, tiles_left, cycles;
  logic [AW-1:0] ifm_base, flt_base, ofm_base, flt_step;
  logic [AW-1:0] ifm_ptr, flt_ptr, ofm_ptr;
  logic        done_flag;
  logic        start;
  logic        feed_q, first_q;

  assign start = reg_we && reg_addr == REG_CTRL && reg_wdata[0] && state == S_IDLE;
  assign busy  = (state != S_IDLE);

  // configuration registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fmt      <= '0;
      k_len    <= 32'd1;
      n_tiles  <= 32'd1;
      ifm_base <= '0;
      flt_base <= '0;
      ofm_base <= '0;
      flt_step <= '0;
    end else if (reg_we && state == S_IDLE) begin
      unique case (reg_addr)
        REG_FORMAT:   fmt      <= reg_wdata[$bits(tfx_fmt_t)-1:0];
        REG_K_LEN:    k_len    <= reg_wdata;
        REG_N_TILES:  n_tiles  <= reg_wdata;
        REG_IFM_BASE: ifm_base <= reg_wdata[AW-1:0];
        REG_FLT_BASE: flt_base <= reg_wdata[AW-1:0];
        REG_OFM_BASE: ofm_base <= reg_wdata[AW-1:0];
        REG_FLT_STEP: flt_step <= reg_wdata[AW-1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (reg_addr)
      REG_STATUS:   reg_rdata = {30'd0, done_flag, busy};
      REG_FORMAT:   reg_rdata = 32'(fmt);
      REG_K_LEN:    reg_rdata = k_len;
      REG_N_TILES:  reg_rdata = n_tiles;
      REG_IFM_BASE: reg_rdata = 32'(ifm_base);
      REG_FLT_BASE: reg_rdata = 32'(flt_base);
      REG_OFM_BASE: reg_rdata = 32'(ofm_base);
      REG_FLT_STEP: reg_rdata = 32'(flt_step);
      REG_CYCLES:   reg_rdata = cycles;
      default:      reg_rdata = 32'd0;
    endcase
  end

  // sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cnt        <= '0;
      tiles_left <= '0;
      ifm_ptr    <= '0;
      flt_ptr    <= '0;
      ofm_ptr    <= '0;
      cycles     <= '0;
      done_flag  <= 1'b0;
      done_irq   <= 1'b0;
    end else begin
      done_irq <= 1'b0;
      if (busy) cycles <= cycles + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          state      <= S_FEED;
          cnt        <= '0;
          tiles_left <= n_tiles;
          ifm_ptr    <= ifm_base;
          flt_ptr    <= flt_base;
          ofm_ptr    <= ofm_base;
          cycles     <= '0;
          done_flag  <= 1'b0;
        end
        S_FEED: begin
          if (cnt == k_len - 1) begin
            state <= S_WAIT;
            cnt   <= '0;
          end else cnt <= cnt + 1'b1;
        end
        S_WAIT: begin
          if (cnt == WAIT_CYC - 1) begin
            state <= S_CAP;
            cnt   <= '0;
          end else cnt <= cnt + 1'b1;
        end
        S_CAP: state <= S_DRAIN;
        S_DRAIN: begin
          if (cnt == ROWS - 1) begin
            cnt     <= '0;
            ifm_ptr <= ifm_ptr + AW'(k_len);
            flt_ptr <= flt_ptr + flt_step;
            ofm_ptr <= ofm_ptr + AW'(ROWS);
            if (tiles_left <= 1) begin
              state     <= S_IDLE;
              done_flag <= 1'b1;
              done_irq  <= 1'b1;
            end else begin
              tiles_left <= tiles_left - 1'b1;
              state      <= S_FEED;
            end
          end else cnt <= cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // buffer reads during FEED; the data and its flags reach the array a
  // cycle later
  always_comb begin
    ifm_rd_en   = (state == S_FEED);
    flt_rd_en   = (state == S_FEED);
    ifm_rd_addr = ifm_ptr + AW'(cnt);
    flt_rd_addr = flt_ptr + AW'(cnt);
    cap         = (state == S_CAP);
    shift       = (state == S_DRAIN);
    ofm_wr_en   = (state == S_DRAIN);
    ofm_wr_addr = ofm_ptr + AW'(ROWS - 1) - AW'(cnt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      feed_q  <= 1'b0;
      first_q <= 1'b0;
    end else begin
      feed_q  <= (state == S_FEED);
      first_q <= (state == S_FEED) && cnt == 0;
    end
  end
  assign act_vld   = feed_q;
  assign act_first = first_q;

  // a start needs a non-empty sum
  assert property (@(posedge clk) start |-> k_len != 0 && n_tiles != 0)
    else $error("control_unit: started with K_LEN or N_TILES of zero");
endmodule
