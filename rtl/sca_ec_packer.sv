// sca_ec_packer: configuration path of the test platform toward the card.
// Software packs the configuration for the slow-control chip into HDLC
// frames; this block only places those bytes into the GBT frame, two bits
// per bunch crossing in the EC (external control) field, most significant
// bit first. A byte is accepted (byte_valid && byte_ready) in the last cycle
// of a BC and takes four BCs to send. With no byte waiting, the HDLC flag
// 0x7E is sent, as the HDLC line idles with flags. Packing in software and
// framing in firmware follow the paper; the EC field, bit order and idle
// flag follow the GBT/HDLC conventions and are not stated in the paper.
// Timing: ec changes on the edge ending a bc_last cycle.
module sca_ec_packer (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       bc_last,
  input  logic       byte_valid,
  input  logic [7:0] byte_data,
  output logic       byte_ready,
  output logic [1:0] ec
);
  localparam logic [7:0] HDLC_FLAG = 8'h7E;
  logic [7:0] sr;
  logic [1:0] left;   // pairs still to send after the current one

  assign byte_ready = bc_last && (left == 2'd0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sr   <= HDLC_FLAG;
      left <= 2'd0;
      ec   <= 2'b00;
    end else if (bc_last) begin
      if (left == 2'd0) begin
        logic [7:0] b;
        b    = byte_valid ? byte_data : HDLC_FLAG;
        ec   <= b[7:6];
        sr   <= {b[5:0], 2'b00};
        left <= 2'd3;
      end else begin
        ec   <= sr[7:6];
        sr   <= {sr[5:0], 2'b00};
        left <= left - 2'd1;
      end
    end
  end
endmodule
