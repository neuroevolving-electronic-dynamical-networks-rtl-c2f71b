// axil_host_if: AXI4-Lite slave through which the host processor loads the
// CTRNN parameters, starts an evaluation, polls for completion and reads the
// resulting neuron states.
//
// Address map (byte addresses, 32-bit words; A = ADDR_W):
//   addr[A-1] = 0 : control registers, word index addr[4:2]
//     0 CTRL     W   bit0 start, bit1 halt = abort (write-one pulses)
//     1 STATUS   R   bit0 busy, bit1 done (sticky, cleared by the next start)
//     2 STEPS    RW  number of Euler steps of an evaluation
//     3 CYCLES   R   busy cycles of the current or last evaluation
//     4 STEPCNT  R   Euler steps completed
//     5 INFO     R   [31:16] number of PEs, [15:0] neurons per PE
//   addr[A-1] = 1 : neuron space, word offset addr[A-2:2] = nb_addr, which
//     the top splits into {PE, neuron, slot}.
// Transfers are handled one at a time. A write needs AW and W together and
// is answered on B the cycle after. A control read answers the cycle after
// AR; a neuron-space read holds nb_addr for two cycles, then returns nb_rdata.
// Writes with a strobe other than 4'hF, and neuron-space writes while an
// evaluation runs, are refused with SLVERR and change nothing.
// The description names the AXI bus and the start/terminate/poll handshake;
// AXI4-Lite, the map and the refusal rules are this implementation's.
module axil_host_if #(
  parameter int ADDR_W = 16,
  parameter int NUM_PE = 314,
  parameter int N      = 2,
  parameter int NB_W   = ADDR_W - 3
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // evaluation controller
  output logic              start,
  output logic              halt,
  output logic [31:0]       steps,
  input  logic              busy,
  input  logic              done,
  input  logic [31:0]       step_cnt,
  input  logic [31:0]       cycle_cnt,
  output logic              done_flag,
  // neuron-space bus
  output logic              nb_we,
  output logic [NB_W-1:0]   nb_addr,
  output logic [31:0]       nb_wdata,
  input  logic [31:0]       nb_rdata
);
  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;

  typedef enum logic [1:0] {S_IDLE, S_RWAIT1, S_RWAIT2, S_RRESP} rstate_t;
  rstate_t rstate;

  // ----------------------------------------------------------------- writes
  logic wr_fire;
  logic wr_nspace;
  logic wr_ok;
  logic [2:0] wr_idx;

  assign s_axil_awready = !s_axil_bvalid && s_axil_awvalid && s_axil_wvalid
                          && rstate == S_IDLE;
  assign s_axil_wready  = s_axil_awready;
  assign wr_fire   = s_axil_awready;
  assign wr_nspace = s_axil_awaddr[ADDR_W-1];
  assign wr_idx    = s_axil_awaddr[4:2];
  assign wr_ok     = (s_axil_wstrb == 4'hF) && !(wr_nspace && busy);

  // ------------------------------------------------------------------ reads
  logic [NB_W-1:0] rd_addr_q;

  assign s_axil_arready = (rstate == S_IDLE) && !wr_fire && !s_axil_bvalid;

  // Neuron-space bus: a write uses the AW address, a read the held AR address.
  assign nb_we    = wr_fire && wr_nspace && wr_ok;
  assign nb_wdata = s_axil_wdata;
  assign nb_addr  = wr_fire ? s_axil_awaddr[ADDR_W-2:2] : rd_addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0;
      s_axil_bresp  <= RESP_OKAY;
      s_axil_rvalid <= 1'b0;
      s_axil_rresp  <= RESP_OKAY;
      s_axil_rdata  <= '0;
      rstate        <= S_IDLE;
      rd_addr_q     <= '0;
      start         <= 1'b0;
      halt         <= 1'b0;
      steps         <= '0;
      done_flag     <= 1'b0;
    end else begin
      start <= 1'b0;
      halt <= 1'b0;
      if (done) done_flag <= 1'b1;

      // write channel
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr_fire) begin
        s_axil_bvalid <= 1'b1;
        s_axil_bresp  <= wr_ok ? RESP_OKAY : RESP_SLVERR;
        if (wr_ok && !wr_nspace) begin
          unique case (wr_idx)
            3'd0: begin
              if (s_axil_wdata[0] && !busy) begin
                start     <= 1'b1;
                done_flag <= 1'b0;
              end
              halt <= s_axil_wdata[1];
            end
            3'd2: steps <= s_axil_wdata;
            default: ;
          endcase
        end
      end

      // read channel
      unique case (rstate)
        S_IDLE: begin
          if (s_axil_arvalid && s_axil_arready) begin
            rd_addr_q <= s_axil_araddr[ADDR_W-2:2];
            if (s_axil_araddr[ADDR_W-1]) begin
              rstate <= S_RWAIT1;
            end else begin
              rstate        <= S_RRESP;
              s_axil_rvalid <= 1'b1;
              s_axil_rresp  <= RESP_OKAY;
              unique case (s_axil_araddr[4:2])
                3'd1:    s_axil_rdata <= {30'b0, done_flag, busy};
                3'd2:    s_axil_rdata <= steps;
                3'd3:    s_axil_rdata <= cycle_cnt;
                3'd4:    s_axil_rdata <= step_cnt;
                3'd5:    s_axil_rdata <= {16'(NUM_PE), 16'(N)};
                default: s_axil_rdata <= '0;
              endcase
            end
          end
        end
        S_RWAIT1: rstate <= S_RWAIT2;
        S_RWAIT2: begin
          rstate        <= S_RRESP;
          s_axil_rvalid <= 1'b1;
          s_axil_rresp  <= RESP_OKAY;
          s_axil_rdata  <= nb_rdata;
        end
        S_RRESP: begin
          if (s_axil_rready) begin
            s_axil_rvalid <= 1'b0;
            rstate        <= S_IDLE;
          end
        end
      endcase
    end
  end

  // Slave-side AXI rules: a response stays valid and stable until accepted.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid && $stable(s_axil_bresp));
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));
  a_one_at_a_time: assert property (@(posedge clk) disable iff (!rst_n)
                             !(s_axil_awready && s_axil_arready));
endmodule
