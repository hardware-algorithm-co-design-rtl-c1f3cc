// rota_minid -- mini decoder between the router port and the co-processor.
//
// Takes one 32-bit word per cycle (in_valid/in_data, no back-pressure) with
// a privilege sideband bit (1 = kernel mode).  A word in state IDLE is an
// instruction (format in rota_pkg):
//   c-type (c.set/c.enr/c.pri/c.hyp): kernel mode only -> cfg for one cycle;
//          in user mode it is dropped and priv_err pulses.
//   p.ld / i.ld with P-Len = n: the next n words are payload; each is sent
//          to the storer as st {TID, release order 0..n-1, data}.  With the
//          last payload word (or at once when n = 0) the header goes out as
//          tpara, so a task is never schedulable before its operations are
//          in the pool.
//   i.run: tpara {IRUN, TID, Prio-T} for one cycle.
// Outputs are registered: they appear the cycle after the word.
// The field positions follow the published instruction format; opcode
// values, the service-field layout, the privilege sideband and sending the
// payload on the same port are this design's choices.
module rota_minid
  import rota_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [WORD_W-1:0] in_data,
  input  logic              in_priv,
  output cfg_t              cfg,
  output tpara_t            tpara,
  output store_t            st,
  output logic              priv_err
);

  typedef enum logic {S_IDLE, S_PAYLOAD} state_e;
  state_e           state;
  tpara_t           hdr;
  logic [OFF_W-1:0] cnt;
  instr_t           ins;

  assign ins = instr_t'(in_data);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      hdr      <= '0;
      cnt      <= '0;
      cfg      <= '0;
      tpara    <= '0;
      st       <= '0;
      priv_err <= 1'b0;
    end else begin
      cfg      <= '0;
      tpara    <= '0;
      st       <= '0;
      priv_err <= 1'b0;
      if (in_valid) begin
        unique case (state)
          S_IDLE: begin
            unique case (ins.opcode)
              OP_CTYPE: begin
                if (in_priv) begin
                  cfg.valid <= 1'b1;
                  cfg.sub   <= csub_e'(ins.service[19:18]);
                  cfg.sid   <= ins.sid;
                  cfg.value <= ins.service[TIME_W-1:0];
                end else begin
                  priv_err <= 1'b1;
                end
              end
              OP_PLD, OP_ILD: begin
                hdr.valid <= 1'b1;
                hdr.kind  <= (ins.opcode == OP_PLD) ? TP_PLD : TP_ILD;
                hdr.sid   <= ins.sid;
                hdr.tid   <= ins.tid;
                hdr.plen  <= ins.service[19:15];
                hdr.prio  <= (ins.opcode == OP_ILD) ? ins.service[14:7] : '0;
                cnt       <= '0;
                if (ins.service[19:15] == '0) begin
                  tpara.valid <= 1'b1;
                  tpara.kind  <= (ins.opcode == OP_PLD) ? TP_PLD : TP_ILD;
                  tpara.sid   <= ins.sid;
                  tpara.tid   <= ins.tid;
                  tpara.plen  <= '0;
                  tpara.prio  <= (ins.opcode == OP_ILD) ? ins.service[14:7] : '0;
                end else begin
                  state <= S_PAYLOAD;
                end
              end
              OP_IRUN: begin
                tpara.valid <= 1'b1;
                tpara.kind  <= TP_IRUN;
                tpara.sid   <= ins.sid;
                tpara.tid   <= ins.tid;
                tpara.plen  <= '0;
                tpara.prio  <= ins.service[14:7];
              end
            endcase
          end
          S_PAYLOAD: begin
            st.valid <= 1'b1;
            st.tid   <= hdr.tid;
            st.off   <= cnt;
            st.data  <= in_data;
            cnt      <= cnt + OFF_W'(1);
            if (cnt == hdr.plen - PLEN_W'(1)) begin
              tpara <= hdr;
              state <= S_IDLE;
            end
          end
        endcase
      end
    end
  end

endmodule
