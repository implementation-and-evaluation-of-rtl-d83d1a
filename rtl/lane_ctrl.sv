// lane_ctrl: controller of one IMAX lane.
//
// The host drives a lane through the phases the paper uses to break down its
// processing time: CONF (instruction of each PE), REGV (register
// initialisation), RANGE (address ranges), LOAD (main memory to LMM), EXEC
// (burst computation) and DRAIN (LMM back to main memory). Here the host side
// is a pair of 64-bit valid/ready streams. Every command is one header word
// (cmd_t: phase, PE index, LMM address, count) followed by
//   CONF, REGV, RANGE : one data word for the addressed PE,
//   LOAD              : count data words, written to consecutive LMM words
//                       from addr, one per clock,
//   EXEC              : nothing; count iterations are issued into the array,
//   DRAIN             : nothing; count words from addr come back on rsp.
// A header whose PE index is out of range, or whose phase is unknown, is
// consumed (with its data words) and has no effect.
//
// EXEC timing: after the header is taken the controller issues one iteration
// token per clock for count clocks, then spends one clock closing the burst
// and NPE+1 clocks letting the last token leave the array, so an EXEC
// command takes count + NPE + 2 clocks. DRAIN returns one word every three
// clocks when rsp_ready stays high. The clocks spent in each phase are counted
// in phase_cycles (index = phase_e value), in the spirit of the paper's
// processing-time breakdown.
//
// The phase names come from the paper; the command format, the stream
// handshake and all timing are this design's choices.
module lane_ctrl
  import imax_pkg::*;
#(
  parameter int unsigned NPE = NPE_DEF
) (
  input  logic           clk,
  input  logic           rst_n,
  // host command stream
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  word_t          cmd_data,
  // host response stream (DRAIN data)
  output logic           rsp_valid,
  input  logic           rsp_ready,
  output word_t          rsp_data,
  // towards the PEs
  output logic [15:0]    pe_sel,      // PE addressed by the current command
  output logic           cfg_we,
  output logic           rng_we,
  output logic           reg_we,
  output logic           host_we,
  output logic           host_re,
  output logic [AW-1:0]  host_addr,
  output word_t          host_wdata,  // also the CONF/REGV/RANGE data
  input  word_t          host_rdata,  // LMM port 0 of the selected PE
  output tok_t           tok_d,       // token entering PE 0 next clock
  output tok_t           tok_q,       // token at the input of PE 0
  // status
  output phase_e         phase,
  output logic           busy,
  output logic [NPHASE-1:0][31:0] phase_cycles
);
  typedef enum logic [2:0] {S_HDR, S_DATA, S_EXEC, S_EXWAIT, S_DRD, S_DCAP, S_DOUT} state_e;

  state_e      st;
  cmd_t        hdr;
  logic [15:0] cnt;
  logic [15:0] wait_cnt;
  word_t       rsp_q;
  logic        pe_ok;
  cmd_t        cin;

  assign cin     = cmd_t'(cmd_data);
  assign pe_ok   = (hdr.pe < 16'(NPE));
  assign pe_sel  = hdr.pe;
  assign phase   = (st == S_HDR) ? PH_IDLE : hdr.phase;
  assign busy    = (st != S_HDR);

  assign cmd_ready = (st == S_HDR) || (st == S_DATA);

  // configuration and LOAD writes happen as the data word is accepted
  logic data_fire;
  assign data_fire  = (st == S_DATA) && cmd_valid && pe_ok;
  assign cfg_we     = data_fire && hdr.phase == PH_CONF;
  assign reg_we     = data_fire && hdr.phase == PH_REGV;
  assign rng_we     = data_fire && hdr.phase == PH_RANGE;
  assign host_we    = data_fire && hdr.phase == PH_LOAD;
  assign host_wdata = cmd_data;
  assign host_re    = (st == S_DRD) && pe_ok;
  assign host_addr  = AW'(hdr.addr + cnt);

  assign rsp_valid  = (st == S_DOUT);
  assign rsp_data   = rsp_q;

  // iteration tokens for EXEC
  always_comb begin
    tok_d = '0;
    if (st == S_EXEC && cnt < hdr.count) begin
      tok_d.valid = 1'b1;
      tok_d.first = (cnt == 16'd0);
      tok_d.iter  = ITW'(cnt);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_HDR;
      hdr      <= '0;
      cnt      <= '0;
      wait_cnt <= '0;
      rsp_q    <= '0;
      tok_q    <= '0;
    end else begin
      tok_q <= tok_d;
      unique case (st)
        S_HDR: if (cmd_valid) begin
          hdr <= cin;
          cnt <= '0;
          unique case (cin.phase)
            PH_CONF, PH_REGV, PH_RANGE: st <= S_DATA;
            PH_LOAD:  st <= (cin.count != 0) ? S_DATA : S_HDR;
            PH_EXEC:  st <= S_EXEC;
            PH_DRAIN: st <= (cin.count != 0) ? S_DRD : S_HDR;
            default:  st <= S_HDR;
          endcase
        end
        S_DATA: if (cmd_valid) begin
          if (hdr.phase != PH_LOAD || cnt + 16'd1 == hdr.count) st <= S_HDR;
          cnt <= cnt + 16'd1;
        end
        S_EXEC: begin
          if (cnt < hdr.count) cnt <= cnt + 16'd1;
          else begin
            st       <= S_EXWAIT;
            wait_cnt <= 16'(NPE);
          end
        end
        S_EXWAIT: begin
          if (wait_cnt == 16'd0) st <= S_HDR;
          else wait_cnt <= wait_cnt - 16'd1;
        end
        S_DRD:  st <= S_DCAP;
        S_DCAP: begin
          rsp_q <= pe_ok ? host_rdata : '0;
          st    <= S_DOUT;
        end
        S_DOUT: if (rsp_ready) begin
          cnt <= cnt + 16'd1;
          st  <= (cnt + 16'd1 == hdr.count) ? S_HDR : S_DRD;
        end
        default: st <= S_HDR;
      endcase
    end
  end

  // per-phase clock counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase_cycles <= '0;
    else        phase_cycles[phase] <= phase_cycles[phase] + 32'd1;
  end

  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp_data));
endmodule
