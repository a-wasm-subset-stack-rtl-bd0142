// Single-digit infix calculator (+, -, *), one byte per line, loaded at flash address 0
01 3e 00 00 00 08 01 20 00 00 00 08 1f 12 08 01
30 00 00 00 03 1f 12 08 1f 12 08 01 30 00 00 00
03 01 0d 00 00 00 08 01 0a 00 00 00 08 13 12 01
2b 00 00 00 09 0e 5a 00 00 00 12 01 2d 00 00 00
09 0e 74 00 00 00 12 01 2a 00 00 00 09 0e 8e 00
00 00 05 05 05 0f 00 00 00 00 05 02 01 30 00 00
00 02 08 01 0d 00 00 00 08 01 0a 00 00 00 08 0f
00 00 00 00 05 03 01 30 00 00 00 02 08 01 0d 00
00 00 08 01 0a 00 00 00 08 0f 00 00 00 00 05 04
01 30 00 00 00 02 08 01 0d 00 00 00 08 01 0a 00
00 00 08 0f 00 00 00 00
