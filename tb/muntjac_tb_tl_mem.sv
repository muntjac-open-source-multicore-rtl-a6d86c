// Behavioural TileLink-UH memory for testbenches (stands in for the firmware
// flash and the memory controller, which are outside the SoC).
//
// Byte array of SIZE bytes at BASE. Get of any size up to a line returns
// 2^size/8 beats of AccessAckData (one beat for 8 bytes or less);
// PutFullData/PutPartialData (single beat) write the masked bytes and return
// AccessAck. The first beat follows LAT cycles after the request. `writes`
// counts Puts. Not synthesizable (it is a test model).
module muntjac_tb_tl_mem import muntjac_pkg::*; #(
  parameter logic [PADDR_W-1:0] BASE = MEM_BASE,
  parameter int unsigned SIZE = 65536,
  parameter int unsigned LAT  = 3
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  a_valid_i,
  output logic  a_ready_o,
  input  tl_a_t a_i,
  output logic  d_valid_o,
  input  logic  d_ready_i,
  output tl_d_t d_o
);
  logic [7:0] mem [SIZE];
  int unsigned writes;
  tl_a_t req;
  int    busy, wait_cnt, beat, nbeats;

  assign a_ready_o = busy == 0;
  initial begin
    busy = 0; writes = 0; beat = 0; wait_cnt = 0; nbeats = 0;
    d_valid_o = 1'b0; d_o = '0; req = '0;
  end

  function automatic logic [63:0] rd64(longint unsigned addr);
    logic [63:0] v;
    for (int i = 0; i < 8; i++) v[i*8 +: 8] = mem[(addr - BASE + i) % SIZE];
    return v;
  endfunction

  always @(posedge clk_i) begin
    if (!rst_ni) begin
      busy <= 0; d_valid_o <= 1'b0;
    end else begin
      if (busy == 0 && a_valid_i) begin
        req      = a_i;
        busy     <= 1;
        wait_cnt <= LAT;
        beat     <= 0;
        nbeats   <= (a_i.opcode == Get) ? tl_beats(a_i.size) : 1;
        if (a_i.opcode == PutFullData || a_i.opcode == PutPartialData) begin
          for (int i = 0; i < 8; i++)
            if (a_i.mask[i])
              mem[({a_i.address[PADDR_W-1:3], 3'b0} - BASE + i) % SIZE] = a_i.data[i*8 +: 8];
          writes <= writes + 1;
        end
      end else if (busy != 0) begin
        if (d_valid_o && d_ready_i) begin
          d_valid_o <= 1'b0;
          if (beat + 1 == nbeats) busy <= 0;
          beat <= beat + 1;
        end else if (!d_valid_o) begin
          if (wait_cnt > 0) wait_cnt <= wait_cnt - 1;
          else begin
            d_valid_o     <= 1'b1;
            d_o           <= '0;
            d_o.opcode    <= (req.opcode == Get) ? AccessAckData : AccessAck;
            d_o.size      <= req.size;
            d_o.source    <= req.source;
            d_o.data      <= rd64({req.address[PADDR_W-1:3], 3'b0} + 8 * beat);
          end
        end
      end
    end
  end
endmodule
