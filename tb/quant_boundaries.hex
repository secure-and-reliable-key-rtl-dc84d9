ffce0
ffe08
fff30
00058
00180
002a8
ffd88
ffeb0
fffd8
00100
00228
ffd08
ffe30
fff58
00080
001a8
002d0
ffdb0
ffed8
00000
00128
00250
ffd30
ffe58
fff80
000a8
001d0
002f8
ffdd8
fff00
00028
00150
00278
ffd58
ffe80
fffa8
000d0
001f8
00320
ffe00
fff28
00050
00178
002a0
ffd80
ffea8
fffd0
000f8
00220
ffd00
ffe28
fff50
00078
001a0
002c8
ffda8
ffed0
ffff8
00120
00248
ffd28
ffe50
fff78
000a0
001c8
002f0
ffdd0
ffef8
00020
00148
00270
ffd50
ffe78
fffa0
000c8
001f0
00318
ffdf8
fff20
00048
00170
00298
ffd78
ffea0
fffc8
000f0
00218
ffcf8
ffe20
fff48
00070
00198
002c0
ffda0
ffec8
ffff0
00118
00240
ffd20
ffe48
fff70
00098
001c0
002e8
ffdc8
ffef0
00018
00140
00268
ffd48
ffe70
fff98
000c0
001e8
00310
ffdf0
fff18
00040
00168
00290
ffd70
ffe98
fffc0
000e8
00210
ffcf0
ffe18
fff40
00068
00190
002b8
ffd98
ffec0
fffe8
00110
00238
ffd18
ffe40
fff68
00090
001b8
002e0
ffdc0
ffee8
00010
00138
00260
ffd40
ffe68
fff90
000b8
001e0
00308
ffde8
fff10
00038
00160
00288
ffd68
ffe90
fffb8
000e0
00208
ffce8
ffe10
fff38
00060
00188
002b0
ffd90
ffeb8
fffe0
00108
00230
ffd10
ffe38
fff60
00088
001b0
002d8
ffdb8
ffee0
00008
00130
00258
ffd38
ffe60
fff88
000b0
001d8
00300
ffde0
fff08
00030
00158
00280
ffd60
ffe88
fffb0
000d8
00200
ffce0
ffe08
fff30
00058
00180
002a8
ffd88
ffeb0
fffd8
00100
00228
ffd08
ffe30
fff58
00080
001a8
002d0
ffdb0
ffed8
00000
00128
00250
ffd30
ffe58
fff80
000a8
001d0
002f8
ffdd8
fff00
00028
00150
00278
ffd58
ffe80
fffa8
000d0
001f8
00320
ffe00
fff28
00050
00178
002a0
ffd80
ffea8
fffd0
000f8
00220
ffd00
ffe28
fff50
00078
001a0
