// lns_defs.svh: the LNS word layout, shared by the QAA-LNS modules.
// An LNS word of T arithmetic bits is {zero, sign, mag[T-1:0]}, T+2 bits:
//   zero : 1 when the value is 0 (log2 0 is undefined); sign and mag are 0 then
//   sign : 1 for a negative value
//   mag  : log2|x| * 2^F, T-bit two's complement
`ifndef LNS_DEFS_SVH
`define LNS_DEFS_SVH
`define LNS_STRUCT(T_) struct packed { logic zero; logic sign; logic signed [(T_)-1:0] mag; }
`endif
