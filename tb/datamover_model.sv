// datamover_model -- behavioural model of the AXI Datamover read channel plus
// the DRAM behind it, for simulation only. Accepts 72-bit commands
// (address in bits 63:32, byte count in bits 22:0), queues them, and returns
// the addressed bytes as 64-bit beats, byte at the lowest address in bits 7:0.
// DRAM contents come from edgedrnn_tb_pkg::wbyte(). Ready and valid are
// withheld at random (STALL_PCT percent of cycles) to exercise back-pressure.
module datamover_model #(
  parameter int STALL_PCT = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_tvalid,
  output logic        cmd_tready,
  input  logic [71:0] cmd_tdata,
  output logic        w_tvalid,
  input  logic        w_tready,
  output logic [63:0] w_tdata,
  output int          n_cmds
);
  import edgedrnn_tb_pkg::*;

  longint unsigned q_addr [$];
  int              q_beats [$];
  longint unsigned cur_addr;
  int              cur_left;

  function automatic logic [63:0] beat_at(input longint unsigned a);
    logic [63:0] b;
    for (int i = 0; i < 8; i++) b[8*i +: 8] = 8'(wbyte(a + longint'(i)));
    return b;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_tready <= 1'b0;
      w_tvalid   <= 1'b0;
      w_tdata    <= '0;
      cur_left   <= 0;
      n_cmds     <= 0;
      q_addr.delete();
      q_beats.delete();
    end else begin
      if (cmd_tvalid && cmd_tready) begin
        q_addr.push_back(longint'(cmd_tdata[63:32]));
        q_beats.push_back(int'(cmd_tdata[22:0]) / 8);
        n_cmds <= n_cmds + 1;
      end
      cmd_tready <= ($urandom % 100) >= STALL_PCT;
      // data channel
      if (w_tvalid && w_tready) begin
        w_tvalid <= 1'b0;
      end
      if (!w_tvalid || w_tready) begin
        if (cur_left == 0 && q_addr.size() > 0) begin
          cur_addr = q_addr.pop_front();
          cur_left = q_beats.pop_front();
        end
        if (cur_left > 0 && ($urandom % 100) >= STALL_PCT) begin
          w_tvalid <= 1'b1;
          w_tdata  <= beat_at(cur_addr);
          cur_addr = cur_addr + 8;
          cur_left = cur_left - 1;
        end
      end
    end
  end
endmodule
