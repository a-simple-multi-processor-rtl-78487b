00000000
00000000
00000009
000013a5
00000001
000013af
00000000
00000000
00000001
00000003
00000006
0000000c
00000006
00000007
0000000f
00000006
00000006
00000012
00000051
00000051
00000015
00000007
00000051
00000018
00000052
00000052
0000001b
00000008
00000052
0000001e
00000053
00000053
00000021
000000f5
000000f5
00000024
00000051
000000f5
00000054
000000ea
000000ea
0000002a
00000051
000000ea
0000002d
000000eb
000000eb
00000030
000000f7
000000eb
00000033
000000a4
000000a4
00000036
000000f4
000000a4
00000039
000000f5
000000f5
00000090
000000ed
000000f5
00000042
00000052
00000053
00000042
00000051
00000051
00000045
000000ec
00000051
00000048
00000052
00000006
0000004b
00000006
00000052
0000004e
00000006
00000006
00000021
00000000
00000000
00000000
000000ea
000000ea
00000057
00000053
00000006
0000005a
00000006
000000ea
0000005d
00000006
00000006
00000060
000000eb
000000eb
00000063
00000005
000000eb
00000066
000000a4
000000a4
00000069
000000f3
000000a4
0000006c
00000006
00000006
00000090
00000008
00000008
00000072
000000ed
00000008
00000075
000000f6
00000007
0000007b
00000006
00000006
00000012
000000f6
00000003
0000007e
00000004
00000003
0000008d
00000004
00000006
00000084
00000006
00000003
00000087
00000006
00000006
0000008a
00000007
00000007
00000009
00000006
00000006
ffffffff
000000ec
000000ec
00000093
000000ed
000000ed
00000096
000000f2
000000f2
00000099
000000eb
000000f2
0000009c
000000ea
000000f2
000000a5
000000ea
000000ed
000000a2
00000006
00000006
00000000
000000ee
000000ee
000000a8
000000eb
00000006
000000ab
00000006
000000ee
000000ae
00000006
00000006
000000b1
000000f0
000000f0
000000b4
000000f6
000000f0
000000b7
000000f1
000000f1
000000ba
000000ee
000000f1
000000bd
000000ef
000000ef
000000c0
000000f0
000000ef
000000c3
000000ee
00000006
000000c6
00000006
000000ee
000000c9
00000006
00000006
000000cc
000000f0
00000006
000000cf
00000006
000000f0
000000d2
00000006
00000006
000000d5
000000f2
000000f2
000000d8
000000ee
000000f2
000000db
000000ea
000000f2
000000b7
000000f1
000000ea
000000e1
000000ef
00000006
000000e4
00000006
000000ec
000000e7
00000006
00000006
00000096
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
00000000
ffffff91
ffffffc4
00000000
00000001
00000002
00000000
