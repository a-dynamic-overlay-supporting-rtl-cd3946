// pr_region: behavioural model of a tile's partially reconfigurable region.
//
// BEHAVIOURAL MODEL. On the FPGA this is an empty area of fabric into which a
// pre-synthesized operator bitstream (multiplier, adder, ...) is written at
// run time through the device's configuration port. That cannot be expressed
// as logic, so this model stands in for "a region that currently holds
// operator f": it has the real region's connections from the tile diagram
// (controller, buffer input, result to the Out Mux, both data BRAMs, the
// registers R1..R4) plus a load port that plays the part of the bitstream
// download.
//
// Reconfiguration: cfg_load with cfg_op starts a download. For PR_CYCLES
// clocks the region is blank (cfg_busy high, no operator); then op_id becomes
// cfg_op. The default of 125000 cycles is the reported reconfiguration
// overhead of about 1.25 ms at an assumed 100 MHz clock.
//
// Operation, started by a one-clock start pulse from the controller while
// the region is idle and loaded ("x" is the buffer's stream when stream=1):
//   VM_MAP, len n, stream=0 : out[i] = f(D0[i], D1[i]), one result per clock,
//                             the first two clocks after start.
//   VM_MAP, len n, stream=1 : out[i] = f(x[i], D1[i]) as the x words arrive;
//                             with store=1 also D0[i] = out[i].
//   VM_RED, len n           : acc = R[red_reg]; acc = f(acc, x) over n inputs,
//                             x from the stream (stream=1) or D0[i]; at the
//                             end R[red_reg] = acc.
// done pulses for one clock when the operation ends (for VM_RED in the clock
// the register is written). Operators are integer and combinational behind
// the BRAM read register; the paper's operators include floating point and
// deeper pipelines, which this model does not time. Which operands come from
// where is this design's choice.
module pr_region
  import overlay_pkg::*;
#(
  parameter int unsigned PR_CYCLES = 125000,
  parameter int unsigned DAW       = 12
) (
  input  logic           clk,
  input  logic           rst,
  // bitstream download
  input  logic           cfg_load,
  input  opk_e           cfg_op,
  output logic           cfg_busy,
  output opk_e           op_id,
  // controller
  input  logic           start,
  input  vmode_e         mode,
  input  logic [15:0]    len,
  input  logic [1:0]     red_reg,
  input  logic           stream,     // x operand from the buffer stream
  input  logic           store,      // VM_MAP with stream: write results to D0
  output logic           busy,
  output logic           done,
  // stream from the tile buffer
  input  word_t          in_data,
  input  logic           in_valid,
  output logic           in_ready,
  // result stream to the Out Mux
  output link_t          result,
  // port A of data BRAM D0 (read and write) and D1 (read)
  output logic           d0_en,
  output logic           d0_we,
  output logic [DAW-1:0] d0_addr,
  output word_t          d0_wdata,
  input  word_t          d0_rdata,
  output logic           d1_en,
  output logic [DAW-1:0] d1_addr,
  input  word_t          d1_rdata,
  // registers R1..R4
  input  word_t          regs [NREG],
  output logic           reg_we,
  output logic [1:0]     reg_idx,
  output word_t          reg_wdata
);
  typedef enum logic [1:0] {S_IDLE, S_MAP, S_RED} state_e;

  state_e       state;
  logic [31:0]  cfg_cnt;
  opk_e         cfg_pending;
  logic [15:0]  issue_cnt, data_cnt, n;
  logic         rd_valid;        // BRAM data of the previous issue is valid now
  logic         use_stream, use_store;
  logic [1:0]   rreg;
  word_t        acc;

  function automatic word_t f(opk_e op, word_t a, word_t b);
    unique case (op)
      OPK_MUL: return a * b;
      OPK_ADD: return a + b;
      OPK_SUB: return a - b;
      OPK_MIN: return ($signed(a) < $signed(b)) ? a : b;
      OPK_MAX: return ($signed(a) > $signed(b)) ? a : b;
      default: return '0;
    endcase
  endfunction

  // bitstream download
  always_ff @(posedge clk) begin
    if (rst) begin
      cfg_busy    <= 1'b0;
      cfg_cnt     <= '0;
      op_id       <= OPK_NONE;
      cfg_pending <= OPK_NONE;
    end else if (cfg_load) begin
      cfg_busy    <= 1'b1;
      cfg_cnt     <= 32'(PR_CYCLES);
      op_id       <= OPK_NONE;
      cfg_pending <= cfg_op;
    end else if (cfg_busy) begin
      if (cfg_cnt <= 32'd1) begin
        cfg_busy <= 1'b0;
        op_id    <= cfg_pending;
      end
      cfg_cnt <= cfg_cnt - 1'b1;
    end
  end

  wire issuing  = (state != S_IDLE) && !use_stream && (issue_cnt < n);
  wire stream_x = (state != S_IDLE) && use_stream && (data_cnt < n);
  wire take     = stream_x ? in_valid : rd_valid;
  wire [15:0] next_cnt = data_cnt + {15'd0, take};
  word_t x_now, y_now;
  assign x_now = stream_x ? in_data : d0_rdata;
  assign y_now = f(op_id, x_now, d1_rdata);

  assign in_ready = stream_x;
  assign busy     = (state != S_IDLE);

  // D0: operand reads, or result writes of a streamed map with store
  assign d0_we    = (state == S_MAP) && stream_x && use_store && in_valid;
  assign d0_en    = issuing || d0_we;
  assign d0_addr  = d0_we ? data_cnt[DAW-1:0] : issue_cnt[DAW-1:0];
  assign d0_wdata = y_now;
  // D1: with a streamed x, D1[data_cnt] is kept at the read register by
  // reading ahead at the next index (address 0 while idle).
  assign d1_en    = issuing || (state == S_IDLE) || stream_x;
  assign d1_addr  = (state == S_IDLE) ? '0 : use_stream ? next_cnt[DAW-1:0] : issue_cnt[DAW-1:0];

  always_comb begin
    result.valid = (state == S_MAP) && take;
    result.data  = y_now;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      issue_cnt  <= '0;
      data_cnt   <= '0;
      n          <= '0;
      rd_valid   <= 1'b0;
      use_stream <= 1'b0;
      use_store  <= 1'b0;
      rreg       <= '0;
      acc        <= '0;
      done       <= 1'b0;
      reg_we     <= 1'b0;
      reg_idx    <= '0;
      reg_wdata  <= '0;
    end else begin
      done     <= 1'b0;
      reg_we   <= 1'b0;
      rd_valid <= issuing;
      unique case (state)
        S_IDLE: if (start && !cfg_busy) begin
          state      <= (mode == VM_MAP) ? S_MAP : S_RED;
          n          <= len;
          issue_cnt  <= '0;
          data_cnt   <= '0;
          use_stream <= stream;
          use_store  <= stream && store && (mode == VM_MAP);
          rreg       <= red_reg;
          acc        <= regs[red_reg];
          rd_valid   <= 1'b0;
        end
        S_MAP, S_RED: begin
          if (issuing) issue_cnt <= issue_cnt + 1'b1;
          if (take) begin
            data_cnt <= data_cnt + 1'b1;
            if (state == S_RED) acc <= f(op_id, acc, x_now);
          end
          if ((data_cnt == n) || (take && (data_cnt + 1'b1 == n))) begin
            state <= S_IDLE;
            done  <= 1'b1;
            if (state == S_RED) begin
              reg_we    <= 1'b1;
              reg_idx   <= rreg;
              reg_wdata <= take ? f(op_id, acc, x_now) : acc;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (rst) start |-> (state == S_IDLE));
endmodule
