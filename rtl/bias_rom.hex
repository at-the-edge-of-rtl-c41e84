ffffff9c
ffffffc1
ffffffe6
0000000b
00000030
00000055
ffffffb1
ffffffd6
fffffffb
00000020
00000045
ffffffa1
ffffffc6
ffffffeb
00000010
00000035
0000005a
ffffffb6
ffffffdb
00000000
00000025
0000004a
ffffffa6
ffffffcb
fffffff0
00000015
0000003a
0000005f
ffffffbb
ffffffe0
00000005
0000002a
0000004f
ffffffab
ffffffd0
fffffff5
0000001a
0000003f
00000064
ffffffc0
ffffffe5
0000000a
0000002f
00000054
ffffffb0
ffffffd5
fffffffa
0000001f
00000044
ffffffa0
ffffffc5
ffffffea
0000000f
00000034
00000059
ffffffb5
ffffffda
ffffffff
00000024
00000049
ffffffa5
ffffffca
ffffffef
00000014
00000039
0000005e
ffffffba
ffffffdf
00000004
00000029
0000004e
ffffffaa
ffffffcf
fffffff4
00000019
0000003e
00000063
ffffffbf
ffffffe4
00000009
0000002e
00000053
ffffffaf
ffffffd4
fffffff9
0000001e
00000043
ffffff9f
ffffffc4
ffffffe9
0000000e
00000033
00000058
ffffffb4
ffffffd9
fffffffe
00000023
00000048
ffffffa4
ffffffc9
ffffffee
00000013
00000038
0000005d
ffffffb9
ffffffde
00000003
00000028
0000004d
ffffffa9
ffffffce
fffffff3
00000018
0000003d
00000062
ffffffbe
ffffffe3
00000008
0000002d
00000052
ffffffae
ffffffd3
fffffff8
0000001d
00000042
ffffff9e
ffffffc3
ffffffe8
0000000d
00000032
00000057
ffffffb3
ffffffd8
fffffffd
00000022
00000047
ffffffa3
ffffffc8
ffffffed
00000012
00000037
0000005c
ffffffb8
ffffffdd
00000002
00000027
0000004c
ffffffa8
ffffffcd
fffffff2
00000017
0000003c
00000061
ffffffbd
ffffffe2
00000007
0000002c
00000051
ffffffad
ffffffd2
fffffff7
0000001c
00000041
ffffff9d
ffffffc2
ffffffe7
0000000c
00000031
00000056
ffffffb2
ffffffd7
fffffffc
00000021
00000046
ffffffa2
ffffffc7
ffffffec
00000011
00000036
0000005b
ffffffb7
ffffffdc
00000001
00000026
0000004b
ffffffa7
ffffffcc
fffffff1
00000016
0000003b
00000060
ffffffbc
ffffffe1
00000006
0000002b
00000050
ffffffac
ffffffd1
fffffff6
0000001b
00000040
ffffff9c
ffffffc1
ffffffe6
0000000b
00000030
00000055
ffffffb1
ffffffd6
fffffffb
00000020
00000045
ffffffa1
ffffffc6
ffffffeb
00000010
00000035
0000005a
ffffffb6
ffffffdb
00000000
00000025
0000004a
ffffffa6
ffffffcb
fffffff0
00000015
0000003a
0000005f
ffffffbb
ffffffe0
00000005
0000002a
0000004f
ffffffab
ffffffd0
fffffff5
0000001a
0000003f
00000064
ffffffc0
ffffffe5
0000000a
0000002f
00000054
ffffffb0
ffffffd5
fffffffa
0000001f
00000044
ffffffa0
ffffffc5
ffffffea
0000000f
00000034
00000059
ffffffb5
ffffffda
ffffffff
00000024
00000049
ffffffa5
ffffffca
ffffffef
00000014
00000039
0000005e
ffffffba
ffffffdf
00000004
00000029
0000004e
ffffffaa
ffffffcf
fffffff4
00000019
0000003e
00000063
ffffffbf
ffffffe4
00000009
0000002e
00000053
ffffffaf
ffffffd4
fffffff9
0000001e
00000043
ffffff9f
ffffffc4
ffffffe9
0000000e
00000033
00000058
ffffffb4
ffffffd9
fffffffe
00000023
00000048
ffffffa4
ffffffc9
ffffffee
00000013
00000038
0000005d
ffffffb9
ffffffde
00000003
00000028
0000004d
ffffffa9
ffffffce
fffffff3
00000018
0000003d
00000062
ffffffbe
ffffffe3
00000008
0000002d
00000052
ffffffae
ffffffd3
fffffff8
0000001d
00000042
ffffff9e
ffffffc3
ffffffe8
0000000d
00000032
00000057
ffffffb3
ffffffd8
fffffffd
00000022
00000047
ffffffa3
ffffffc8
ffffffed
00000012
00000037
0000005c
ffffffb8
ffffffdd
00000002
00000027
0000004c
ffffffa8
ffffffcd
fffffff2
00000017
0000003c
00000061
ffffffbd
ffffffe2
00000007
0000002c
00000051
ffffffad
ffffffd2
fffffff7
0000001c
00000041
ffffff9d
ffffffc2
ffffffe7
0000000c
00000031
00000056
ffffffb2
ffffffd7
fffffffc
00000021
00000046
ffffffa2
ffffffc7
ffffffec
00000011
00000036
0000005b
ffffffb7
ffffffdc
00000001
00000026
0000004b
ffffffa7
ffffffcc
fffffff1
00000016
0000003b
00000060
ffffffbc
ffffffe1
00000006
0000002b
00000050
ffffffac
ffffffd1
fffffff6
0000001b
00000040
ffffff9c
ffffffc1
ffffffe6
0000000b
00000030
00000055
ffffffb1
ffffffd6
fffffffb
00000020
00000045
ffffffa1
ffffffc6
ffffffeb
00000010
00000035
0000005a
ffffffb6
ffffffdb
00000000
00000025
0000004a
ffffffa6
ffffffcb
fffffff0
00000015
0000003a
0000005f
ffffffbb
ffffffe0
00000005
0000002a
0000004f
ffffffab
ffffffd0
fffffff5
0000001a
0000003f
00000064
ffffffc0
ffffffe5
0000000a
0000002f
00000054
ffffffb0
ffffffd5
fffffffa
0000001f
00000044
ffffffa0
ffffffc5
ffffffea
0000000f
00000034
00000059
ffffffb5
ffffffda
ffffffff
00000024
00000049
ffffffa5
ffffffca
ffffffef
00000014
00000039
0000005e
ffffffba
ffffffdf
00000004
00000029
0000004e
ffffffaa
ffffffcf
fffffff4
00000019
0000003e
00000063
ffffffbf
ffffffe4
00000009
0000002e
00000053
ffffffaf
ffffffd4
fffffff9
0000001e
00000043
ffffff9f
ffffffc4
ffffffe9
0000000e
00000033
00000058
ffffffb4
ffffffd9
fffffffe
00000023
00000048
ffffffa4
ffffffc9
ffffffee
00000013
00000038
0000005d
ffffffb9
ffffffde
00000003
00000028
0000004d
ffffffa9
