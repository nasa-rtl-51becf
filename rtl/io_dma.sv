// io_dma: moves network inputs from DRAM into the global buffer and network
// outputs from the global buffer back to DRAM.
//
// One command per pipeline step: on start it first stores store_len words
// from buffer address store_src to DRAM address store_dst (if store_en), then
// loads load_len words from DRAM load_src into buffer load_dst (if load_en),
// then pulses done. A store moves one word at a time (buffer read, then DRAM
// write once DRAM is ready). A load keeps issuing DRAM reads while DRAM
// accepts them and writes each answer into the buffer as it arrives.
// It owns global-buffer port B. The paper draws these two transfers as the
// Input and Output arrows between DRAM and the global buffer; the engine
// that performs them is this design's own.
module io_dma
  import nasa_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     load_en,
  input  logic [DRAM_AW-1:0]       load_src,
  input  logic [GB_AW-1:0]         load_dst,
  input  logic [GB_AW:0]           load_len,
  input  logic                     store_en,
  input  logic [GB_AW-1:0]         store_src,
  input  logic [DRAM_AW-1:0]       store_dst,
  input  logic [GB_AW:0]           store_len,
  output logic                     done,
  // global buffer port B
  output logic                     gb_req_valid,
  output gb_req_t                  gb_req,
  input  logic                     gb_rsp_valid,
  input  logic [ACT_W-1:0]         gb_rsp_data,
  // DRAM input/output port
  output logic                     d_req_valid,
  output dram_req_t                d_req,
  input  logic                     d_req_ready,
  input  logic                     d_rsp_valid,
  input  logic [WGT_W-1:0]         d_rsp_data
);
  typedef enum logic [2:0] {S_IDLE, S_ST_RD, S_ST_WAIT, S_ST_WR, S_LOAD} state_e;
  state_e state;

  logic                 ld_en;
  logic [DRAM_AW-1:0]   ld_src, st_dst;
  logic [GB_AW-1:0]     ld_dst, st_src;
  logic [GB_AW:0]       ld_len, st_len, iss, rcv;
  logic [ACT_W-1:0]     word;


  always_comb begin
    gb_req_valid = 1'b0;
    gb_req       = '0;
    d_req_valid  = 1'b0;
    d_req        = '0;
    unique case (state)
      S_ST_RD: begin
        gb_req_valid = 1'b1;
        gb_req.addr  = GB_AW'(st_src + iss);
      end
      S_ST_WR: begin
        d_req_valid = 1'b1;
        d_req.we    = 1'b1;
        d_req.addr  = DRAM_AW'(st_dst + iss);
        d_req.wdata = word;
      end
      S_LOAD: begin
        d_req_valid  = (iss < ld_len);
        d_req.addr   = DRAM_AW'(ld_src + iss);
        gb_req_valid = d_rsp_valid;
        gb_req.we    = 1'b1;
        gb_req.addr  = GB_AW'(ld_dst + rcv);
        gb_req.wdata = d_rsp_data;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      done   <= 1'b0;
      ld_en  <= 1'b0;
      ld_src <= '0;
      ld_dst <= '0;
      ld_len <= '0;
      st_src <= '0;
      st_dst <= '0;
      st_len <= '0;
      iss    <= '0;
      rcv    <= '0;
      word   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ld_en  <= load_en && load_len != '0;
          ld_src <= load_src;
          ld_dst <= load_dst;
          ld_len <= load_len;
          st_src <= store_src;
          st_dst <= store_dst;
          st_len <= store_len;
          iss    <= '0;
          rcv    <= '0;
          if (store_en && store_len != '0)     state <= S_ST_RD;
          else if (load_en && load_len != '0) state <= S_LOAD;
          else                                done  <= 1'b1;
        end
        S_ST_RD:   state <= S_ST_WAIT;
        S_ST_WAIT: if (gb_rsp_valid) begin
          word  <= gb_rsp_data;
          state <= S_ST_WR;
        end
        S_ST_WR: if (d_req_ready) begin
          if (iss + 1'b1 == st_len) begin
            iss <= '0;
            if (ld_en) state <= S_LOAD;
            else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end else begin
            iss   <= iss + 1'b1;
            state <= S_ST_RD;
          end
        end
        S_LOAD: begin
          if (d_req_valid && d_req_ready) iss <= iss + 1'b1;
          if (d_rsp_valid) begin
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 == ld_len) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
