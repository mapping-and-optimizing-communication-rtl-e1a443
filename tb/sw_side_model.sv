// sw_side_model -- behavioural model of everything on the far side of a
// gateway's OSIF and MEMIF: main memory with a MEMIF port (the memory
// subsystem), the software delegate thread, the software-mapped topic (SMT)
// and one software subscriber node. Not synthesizable; for simulation only.
//
// Main memory: MEM_WORDS 32-bit words, byte addressed. MEMIF commands are
// {write, length in bytes} + address + data; reads are returned on the
// memory-to-thread FIFO. Writes land in memory when they are accepted, so a
// later read by the delegate sees them.
// Delegate: answers GET_OUT_LOC with OUT_ADDR; after SUB_REQUEST it hands
// the next queued SMT message pointer to the gateway after a random delay;
// SUB_CANCEL returns 0, or the pointer of a message waiting on the SMT; a
// cancel after the pointer was already sent returns nothing. PUBLISH copies
// the output message into a fresh buffer, logs it as received by the software
// subscriber (checking its payload) and queues it on the SMT again, as the
// gateway's own subscription would receive it; then it acknowledges.
// sw_publish() puts a message from a software publisher on the SMT.
// STALL (0..99) is the percentage of cycles the model holds back a FIFO word.
module sw_side_model #(
  parameter int unsigned MEM_WORDS = 1 << 16,
  parameter int unsigned STALL     = 30,
  parameter int unsigned OUT_WORDS = 1 << 14,   // room reserved for the output message
  parameter logic [31:0] OUT_ADDR  = 32'h0000_0040
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] osif_hw2sw_data,
  input  logic        osif_hw2sw_valid,
  output logic        osif_hw2sw_ready,
  output logic [31:0] osif_sw2hw_data,
  output logic        osif_sw2hw_valid,
  input  logic        osif_sw2hw_ready,
  input  logic [31:0] memif_hwt2mem_data,
  input  logic        memif_hwt2mem_valid,
  output logic        memif_hwt2mem_ready,
  output logic [31:0] memif_mem2hwt_data,
  output logic        memif_mem2hwt_valid,
  input  logic        memif_mem2hwt_ready
);
  import tb_pkg::*;
  import gw_pkg::*;

  logic [31:0] mem [MEM_WORDS];

  // buffers start after the output message area (one maximum message)
  int unsigned next_free;
  int unsigned buf_base;
  int unsigned buf_area;

  // SMT queue seen by the gateway's subscription, and OSIF replies
  logic [31:0] smt_q[$];
  logic [31:0] rsp_q[$];
  bit          pending;

  // software subscriber log
  int unsigned sw_rx_count, sw_rx_errors;
  longint unsigned sw_rx_time;   // $time of the latest PUBLISH
  logic [31:0] sw_rx_id[$];
  logic [31:0] sw_rx_seed[$];
  int unsigned sw_rx_len[$];

  // statistics
  longint unsigned memif_rd_words, memif_wr_words, memif_cmds;
  int unsigned     osif_cmds[4];

  // MEMIF parser
  typedef enum {M_CMD, M_ADDR, M_WDATA} mstate_e;
  mstate_e     mst;
  logic        m_write;
  int unsigned m_words, m_idx;
  logic [31:0] m_addr;
  logic [31:0] rd_q[$];

  function automatic int unsigned alloc(input int unsigned words);
    int unsigned a;
    if (next_free + words >= MEM_WORDS) next_free = buf_base;
    a = next_free;
    next_free += words;
    return a;
  endfunction

  // A software publisher writes a message into a fresh buffer and publishes it.
  task automatic sw_publish(input logic [31:0] id, input int unsigned len, input logic [31:0] seed);
    int unsigned a;
    a = alloc(len + 2);
    mem[a] = id;
    mem[a + 1] = len;
    for (int unsigned i = 0; i < len; i++) mem[a + 2 + i] = payload_word(seed, i);
    smt_q.push_back(32'(a * 4));
  endtask

  initial begin
    buf_area  = OUT_WORDS;
    buf_base  = (OUT_ADDR / 4) + buf_area;
    next_free = buf_base;
    for (int i = 0; i < int'(MEM_WORDS); i++) mem[i] = '0;
  end

  // ---------------------------------------------------------------- OSIF
  always @(posedge clk) begin
    if (!rst_n) begin
      pending          <= 1'b0;
      osif_hw2sw_ready <= 1'b0;
      osif_sw2hw_valid <= 1'b0;
      osif_sw2hw_data  <= '0;
      rsp_q.delete();
    end else begin
      if (osif_sw2hw_valid && osif_sw2hw_ready) void'(rsp_q.pop_front());

      if (osif_hw2sw_valid && osif_hw2sw_ready) begin
        unique case (osif_hw2sw_data)
          OSIF_CMD_GET_OUT_LOC: begin osif_cmds[0]++; rsp_q.push_back(OUT_ADDR); end
          OSIF_CMD_SUB_REQUEST: begin osif_cmds[1]++; pending = 1'b1; end
          OSIF_CMD_SUB_CANCEL: begin
            osif_cmds[2]++;
            if (pending) begin
              pending = 1'b0;
              if (smt_q.size() > 0) rsp_q.push_back(smt_q.pop_front());
              else                  rsp_q.push_back(OSIF_NO_MSG);
            end
          end
          OSIF_CMD_PUBLISH: begin
            int unsigned o, len, a;
            bit ok;
            osif_cmds[3]++;
            o   = OUT_ADDR / 4;
            len = mem[o + 1];
            a   = alloc(len + 2);
            ok  = 1;
            for (int unsigned i = 0; i < len + 2; i++) mem[a + i] = mem[o + i];
            for (int unsigned i = 1; i < len; i++)
              if (mem[o + 2 + i] != payload_word(mem[o + 2], i)) ok = 0;
            sw_rx_count++;
            sw_rx_time = $time;
            if (!ok) sw_rx_errors++;
            sw_rx_id.push_back(mem[o]);
            sw_rx_seed.push_back(len > 0 ? mem[o + 2] : 32'h0);
            sw_rx_len.push_back(len);
            smt_q.push_back(32'(a * 4));
            rsp_q.push_back(32'h1);
          end
          default: $display("sw_side_model: unknown OSIF word %h", osif_hw2sw_data);
        endcase
      end

      // the blocked take returns when a message is on the SMT
      if (pending && smt_q.size() > 0 && (int'($urandom_range(99)) >= int'(STALL))) begin
        pending = 1'b0;
        rsp_q.push_back(smt_q.pop_front());
      end

      osif_hw2sw_ready <= (int'($urandom_range(99)) >= int'(STALL));
      if (rsp_q.size() > 0 && (osif_sw2hw_valid && !osif_sw2hw_ready ? 1'b1 : (int'($urandom_range(99)) >= int'(STALL)))) begin
        osif_sw2hw_valid <= 1'b1;
        osif_sw2hw_data  <= rsp_q[0];
      end else begin
        osif_sw2hw_valid <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------- MEMIF
  always @(posedge clk) begin
    if (!rst_n) begin
      mst                 <= M_CMD;
      memif_hwt2mem_ready <= 1'b0;
      memif_mem2hwt_valid <= 1'b0;
      memif_mem2hwt_data  <= '0;
      rd_q.delete();
    end else begin
      if (memif_mem2hwt_valid && memif_mem2hwt_ready) void'(rd_q.pop_front());

      if (memif_hwt2mem_valid && memif_hwt2mem_ready) begin
        unique case (mst)
          M_CMD: begin
            memif_cmds++;
            m_write = memif_hwt2mem_data[31];
            m_words = int'(memif_hwt2mem_data[MEMIF_LEN_W-1:0]) / 4;
            mst    <= M_ADDR;
          end
          M_ADDR: begin
            m_addr = memif_hwt2mem_data;
            m_idx  = 0;
            if (m_write) begin
              mst <= (m_words == 0) ? M_CMD : M_WDATA;
            end else begin
              for (int unsigned i = 0; i < m_words; i++) rd_q.push_back(mem[m_addr / 4 + i]);
              memif_rd_words += longint'(m_words);
              mst <= M_CMD;
            end
          end
          M_WDATA: begin
            mem[m_addr / 4 + m_idx] = memif_hwt2mem_data;
            m_idx++;
            memif_wr_words++;
            if (m_idx == m_words) mst <= M_CMD;
          end
          default: mst <= M_CMD;
        endcase
      end

      memif_hwt2mem_ready <= (int'($urandom_range(99)) >= int'(STALL));
      if (rd_q.size() > 0 && (memif_mem2hwt_valid && !memif_mem2hwt_ready ? 1'b1 : (int'($urandom_range(99)) >= int'(STALL)))) begin
        memif_mem2hwt_valid <= 1'b1;
        memif_mem2hwt_data  <= rd_q[0];
      end else begin
        memif_mem2hwt_valid <= 1'b0;
      end
    end
  end

endmodule
